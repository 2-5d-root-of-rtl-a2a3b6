// tb_ahb_interconnect -- self-checking testbench of the AHB-Lite fabric.
// Four masters, each behind a bus interface with master ID = its index,
// share the bus to one memory, the SRS window and two PRS windows (here
// plain behavioural slaves with 0 or 1 wait states).  All masters run at
// once: each writes and reads back its own words in every slave and also
// hits an unmapped address.  Checks read data, OKAY/ERROR responses, the
// master ID seen by the slaves, and that every transfer reached exactly the
// slave its address decodes to.
module tb_ahb_interconnect;
  import isea_pkg::*;
  localparam int NMST = 4, NMEM = 1, NSLV = 2 * NMEM + 2;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  ahb_m2s_t  [NMST-1:0] m_req;
  ahb_s2m_t  [NMST-1:0] m_rsp;
  logic      [NMST-1:0] b_req, b_grant, b_dgrant;
  ahb_addr_t [NMST-1:0] b_addr;
  logic      [NMST-1:0][31:0] b_hwdata;
  ahb_s2m_t  bus_rsp;
  logic      [NSLV-1:0] s_hsel, s_hreadyout, s_hresp;
  logic      [NSLV-1:0][31:0] s_hrdata;
  ahb_addr_t s_addr;
  logic [31:0] s_hwdata;
  logic s_hready;
  int n_xfer [NSLV], n_bad [NSLV];

  for (genvar k = 0; k < NMST; k++) begin : g_bi
    ahb_master_bi #(.MID(32'(k))) u_bi (
      .hclk(clk), .hresetn(rstn), .m_req(m_req[k]), .m_rsp(m_rsp[k]), .req(b_req[k]),
      .b_addr(b_addr[k]), .b_hwdata(b_hwdata[k]), .grant(b_grant[k]), .dgrant(b_dgrant[k]),
      .bus_rsp(bus_rsp));
  end

  ahb_interconnect #(.N_MST(NMST), .N_MEM(NMEM), .N_SLV(NSLV)) dut (
    .hclk(clk), .hresetn(rstn), .m_req(b_req), .m_addr(b_addr), .m_hwdata(b_hwdata),
    .m_grant(b_grant), .m_dgrant(b_dgrant), .bus_rsp(bus_rsp),
    .s_hsel(s_hsel), .s_addr(s_addr), .s_hwdata(s_hwdata), .s_hready(s_hready),
    .s_hreadyout(s_hreadyout), .s_hresp(s_hresp), .s_hrdata(s_hrdata));

  for (genvar s = 0; s < NSLV; s++) begin : g_slv
    tb_ahb_slave_model #(.WAIT(s % 2)) u_s (
      .clk(clk), .hsel(s_hsel[s]), .haddr(s_addr.haddr), .htrans(s_addr.htrans),
      .hwrite(s_addr.hwrite), .hmaster(s_addr.hmaster), .hwdata(s_hwdata), .hready(s_hready),
      .hreadyout(s_hreadyout[s]), .hresp(s_hresp[s]), .hrdata(s_hrdata[s]),
      .n_xfer(n_xfer[s]), .n_bad_id(n_bad[s]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "tb_master_tasks.svh"

  localparam logic [31:0] BASES [NSLV] = '{32'h2000_0000, 32'h4002_0000, 32'h5000_0000, 32'h5000_4000};
  int exp_xfer [NSLV];

  task automatic master_run(input int m);
    bit err; logic [31:0] rd; int cyc;
    for (int n = 0; n < 40; n++) begin
      int s, w; logic [31:0] a, d;
      s = $urandom_range(0, NSLV - 1);
      w = $urandom_range(0, 15);
      a = BASES[s] + 32'(m * 64 + w * 4);
      d = {m[7:0], 8'(n), 16'($urandom)};
      mxfer(m, a, d, 1'b1, err, rd, cyc);
      check(!err, $sformatf("m%0d write %h error", m, a));
      mxfer(m, a, 0, 1'b0, err, rd, cyc);
      check(!err && rd == d, $sformatf("m%0d read %h got %h expected %h", m, a, rd, d));
      exp_xfer[s] += 2;
      if (n % 10 == 0) begin
        mxfer(m, 32'h9000_0000 + 32'(m * 64), 0, 1'b0, err, rd, cyc);
        check(err && rd == 0, $sformatf("m%0d unmapped access not answered with ERROR", m));
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_req = '0;
    foreach (exp_xfer[s]) exp_xfer[s] = 0;
    repeat (2) @(posedge clk);
    rstn = 1;
    fork
      master_run(0);
      master_run(1);
      master_run(2);
      master_run(3);
    join
    repeat (3) @(posedge clk);
    for (int s = 0; s < NSLV; s++) begin
      check(n_xfer[s] == exp_xfer[s], $sformatf("slave %0d saw %0d transfers, expected %0d", s, n_xfer[s], exp_xfer[s]));
      check(n_bad[s] == 0, $sformatf("slave %0d saw %0d wrong master IDs", s, n_bad[s]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
