// tb_secure_if -- self-checking testbench of the Secure Interface.
// The SI's bus side drives a behavioural AHB-Lite slave with a random number
// of wait states that answers ERROR above 0x8000_0000 and stalls the address
// phase at random (as a busy bus would).  A TCU model issues random word
// reads and writes with random gaps; each command must produce exactly one
// bus transfer with the right address, direction and data, and one
// tcu_rvalid pulse with the right read data and error flag.
module tb_secure_if;
  import isea_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic        tcu_valid = 1'b0, tcu_ready, tcu_write = 1'b0, tcu_rvalid, tcu_err;
  logic [31:0] tcu_addr = '0, tcu_wdata = '0, tcu_rdata;
  ahb_m2s_t    m_req;
  ahb_s2m_t    m_rsp;

  secure_if dut (.hclk(clk), .hresetn(rstn), .tcu_valid(tcu_valid), .tcu_ready(tcu_ready),
    .tcu_write(tcu_write), .tcu_addr(tcu_addr), .tcu_wdata(tcu_wdata), .tcu_rvalid(tcu_rvalid),
    .tcu_rdata(tcu_rdata), .tcu_err(tcu_err), .m_req(m_req), .m_rsp(m_rsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Slave model: memory of 64 words, hready low for a random number of
  // cycles in every data phase and (as a stall) at random while idle.
  logic [31:0] mem [64];
  logic        act = 0, w_q = 0, e_q = 0, stall = 0;
  logic [5:0]  a_q;
  int          wait_n = 0, n_xfer = 0;
  logic [31:0] last_a; logic last_w;
  always @(posedge clk) begin
    stall <= ($urandom_range(0, 3) == 0);
    if (act && wait_n > 0) wait_n <= wait_n - 1;
    else if (m_rsp.hready) begin
      if (act && w_q && !e_q) mem[a_q] <= m_req.hwdata;
      act <= 1'b0;
      if (m_req.htrans == HTRANS_NONSEQ) begin
        act <= 1; a_q <= m_req.haddr[7:2]; w_q <= m_req.hwrite; e_q <= m_req.haddr[31];
        wait_n <= m_req.haddr[31] ? 1 : $urandom_range(0, 2);
        n_xfer <= n_xfer + 1; last_a <= m_req.haddr; last_w <= m_req.hwrite;
      end
    end
  end
  always_comb begin
    m_rsp.hready = act ? (wait_n == 0) : !stall;
    m_rsp.hresp  = act && e_q;
    m_rsp.hrdata = (act && !w_q && !e_q && wait_n == 0) ? mem[a_q] : 32'h0;
  end
  // ERROR needs two cycles: hresp high with hready low, then high with hready.
  // The model shows hresp during its single forced wait cycle and the last one.

  logic [31:0] ref_mem [64];
  int n_rv = 0;
  always @(posedge clk) if (tcu_rvalid) n_rv++;

  task automatic tcu_cmd(input bit wr, input logic [31:0] a, input logic [31:0] d,
                         output logic [31:0] rd, output bit err);
    int t0, x0;
    @(negedge clk);
    tcu_valid = 1; tcu_write = wr; tcu_addr = a; tcu_wdata = d;
    while (!tcu_ready) @(negedge clk);
    x0 = n_xfer; t0 = n_rv;
    @(posedge clk);
    @(negedge clk);
    tcu_valid = 0; tcu_wdata = 'x;
    while (!tcu_rvalid) @(negedge clk);
    rd = tcu_rdata; err = tcu_err;
    check(n_xfer == x0 + 1, "one bus transfer per command");
    check(last_a == a && last_w == wr, $sformatf("bus address %h/%0d expected %h/%0d", last_a, last_w, a, wr));
    @(negedge clk);
    check(!tcu_rvalid && n_rv == t0 + 1, "one tcu_rvalid pulse per command");
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd; bit err;
    for (int i = 0; i < 64; i++) begin mem[i] = 0; ref_mem[i] = 0; end
    repeat (2) @(posedge clk);
    rstn = 1;
    for (int n = 0; n < 600; n++) begin
      int w; bit wr, bad; logic [31:0] d, a;
      w = $urandom_range(0, 63); wr = $urandom_range(0, 1); bad = ($urandom_range(0, 7) == 0);
      d = $urandom; a = {bad, 23'h0, 6'(w), 2'b00};
      tcu_cmd(wr, a, d, rd, err);
      check(err == bad, $sformatf("error flag %0d expected %0d at %h", err, bad, a));
      if (wr && !bad) ref_mem[w] = d;
      if (!wr && !bad) check(rd == ref_mem[w], $sformatf("read %h got %h expected %h", a, rd, ref_mem[w]));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
