// tb_ahb_master_bi -- self-checking testbench of the master bus interface.
// The testbench is both the master and the rest of the bus.  For each of
// many transfers it checks that the BI requests the bus with the captured
// address and its wired master ID (even though the master drives other
// values in the later cycles), passes the transfer straight through when
// the bus is granted in the master's own address-phase cycle, otherwise
// stalls the master until granted, hides all other
// masters' response data and errors while it does not own the data phase,
// and passes the owned data phase (wait states, ERROR, read data) through.
module tb_ahb_master_bi;
  import isea_pkg::*;
  localparam logic [31:0] MID = 32'd37;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  ahb_m2s_t  m_req;
  ahb_s2m_t  m_rsp, bus_rsp;
  logic      req, grant, dgrant;
  ahb_addr_t b_addr;
  logic [31:0] b_hwdata;

  ahb_master_bi #(.MID(MID)) dut (
    .hclk(clk), .hresetn(rstn), .m_req(m_req), .m_rsp(m_rsp), .req(req), .b_addr(b_addr),
    .b_hwdata(b_hwdata), .grant(grant), .dgrant(dgrant), .bus_rsp(bus_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_req = '0; grant = 0; dgrant = 0; bus_rsp = '{hrdata: 0, hready: 1, hresp: 0};
    repeat (2) @(posedge clk);
    rstn = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] a, d, rd; bit wr, err; int waitg, waitd, stall;
      a = $urandom; d = $urandom; rd = $urandom; wr = $urandom_range(0, 1) == 1;
      err = ($urandom_range(0, 3) == 0);
      waitg = $urandom_range(0, 5); waitd = $urandom_range(0, 2);
      // master: address phase
      @(negedge clk);
      check(m_rsp.hready, "BI not ready for a new transfer");
      m_req = '{haddr: a, htrans: HTRANS_NONSEQ, hwrite: wr, hsize: HSIZE_WORD, hwdata: 32'h0};
      if (n % 3 == 0) begin
        // bus free: granted in the master's own address-phase cycle, so the
        // transfer goes straight through without a wait state
        bus_rsp = '{hrdata: $urandom, hready: 1, hresp: 0};
        grant = 1;
        #1;
        check(req && b_addr.haddr == a && b_addr.hwrite == wr && b_addr.hmaster == MID &&
              b_addr.htrans == HTRANS_NONSEQ && b_addr.hsize == HSIZE_WORD, "direct request wrong");
        @(negedge clk);
        grant = 0; dgrant = 1;
        m_req = '{haddr: ~a, htrans: HTRANS_IDLE, hwrite: !wr, hsize: HSIZE_BYTE, hwdata: d};
        #1;
        check(!req, "direct transfer left pending");
      end else begin
        @(posedge clk);
        // master: data phase; the address lines now carry other values
        @(negedge clk);
        m_req = '{haddr: ~a, htrans: HTRANS_IDLE, hwrite: !wr, hsize: HSIZE_BYTE, hwdata: d};
        stall = 0;
        // other masters' traffic while we wait for the grant
        for (int k = 0; k < waitg; k++) begin
          bus_rsp = '{hrdata: $urandom, hready: 1'($urandom_range(0, 1)), hresp: 1'($urandom_range(0, 1))};
          #1;
          check(req && b_addr.haddr == a && b_addr.hwrite == wr && b_addr.hmaster == MID &&
                b_addr.htrans == HTRANS_NONSEQ && b_addr.hsize == HSIZE_WORD, "held request wrong");
          check(!m_rsp.hready && !m_rsp.hresp && m_rsp.hrdata == 0, "foreign response leaked");
          @(negedge clk);
        end
        // grant (address phase on the bus)
        bus_rsp = '{hrdata: $urandom, hready: 1, hresp: 0};
        grant = 1;
        #1;
        check(b_addr.haddr == a && b_addr.hmaster == MID, "address phase wrong at grant");
        check(!m_rsp.hready && m_rsp.hrdata == 0, "master released before its data phase");
        @(negedge clk);
        grant = 0; dgrant = 1;
        #1;
        check(!req, "request still pending after address phase");
      end
      check(b_hwdata == d, "write data not passed to the bus");
      // data phase with wait states
      for (int k = 0; k < waitd; k++) begin
        bus_rsp = '{hrdata: 0, hready: 0, hresp: 0};
        #1; check(!m_rsp.hready, "wait state not passed");
        @(negedge clk);
      end
      if (err) begin
        bus_rsp = '{hrdata: 0, hready: 0, hresp: 1};
        #1; check(!m_rsp.hready && m_rsp.hresp, "first ERROR cycle not passed");
        @(negedge clk);
      end
      bus_rsp = '{hrdata: rd, hready: 1, hresp: err};
      m_req.htrans = HTRANS_IDLE;
      #1;
      check(m_rsp.hready && m_rsp.hresp == err && m_rsp.hrdata == rd, "final data-phase cycle not passed");
      @(negedge clk);
      dgrant = 0; bus_rsp = '{hrdata: 32'hDEAD_0000, hready: 1, hresp: 1};
      #1;
      check(m_rsp.hready && !m_rsp.hresp && m_rsp.hrdata == 0, "response seen after data phase");
      check(!req, "IDLE captured as a transfer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
