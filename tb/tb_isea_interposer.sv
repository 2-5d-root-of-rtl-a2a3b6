// tb_isea_interposer -- self-checking testbench of the interposer alone,
// at a reduced size: 4 cores, one shared-memory port, 2 APU and 1 DPU
// policies per TRANSMON.  The memory chiplet is a behavioural slave with
// one wait state that checks the master ID stamped on each transfer (the
// testbench places master k's words at address bits [9:6] = k).
// The TCU loads policies for cores 1 and 2 (core 2 may not write
// 0x0BAD_BEEF); PROC-0 loads an SRS policy for core 1.  Then all cores run
// at once.  Checks: allowed transfers reach the memory with the right ID
// and data, denied ones never reach it and return ERROR, only privileged
// masters program the PRS, unmapped addresses get ERROR, the SRS register
// outputs follow writes, and one interrupt pulse per denied request.
module tb_isea_interposer;
  import isea_pkg::*;
  localparam int NC = 4, NM = 1;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  ahb_m2s_t [NC:0] m_req;
  ahb_s2m_t [NC:0] m_rsp;
  ahb_m2s_t [NC-1:0] core_m2s;
  ahb_s2m_t [NC-1:0] core_s2m;
  ahb_s2m_t proc0_s2m;
  logic [NM:0] irq;
  logic        tcu_valid = 1'b0, tcu_ready, tcu_write = 1'b0, tcu_rvalid, tcu_err;
  logic [31:0] tcu_addr = '0, tcu_wdata = '0, tcu_rdata;
  logic [63:0][31:0] srs_regs;
  logic      [NM-1:0]       mem_hsel, mem_hready, mem_hreadyout, mem_hresp;
  ahb_addr_t [NM-1:0]       mem_addr;
  logic      [NM-1:0][31:0] mem_hwdata, mem_hrdata;
  int n_xfer, n_bad_id;

  for (genvar k = 1; k <= NC; k++) begin : g_core
    assign core_m2s[k-1] = m_req[k];
    assign m_rsp[k]      = core_s2m[k-1];
  end
  assign m_rsp[0] = proc0_s2m;

  isea_interposer #(.N_CORES(NC), .N_MEM(NM), .N_APU(2), .N_DPU(1)) dut (
    .hclk(clk), .hresetn(rstn), .core_m2s(core_m2s), .core_s2m(core_s2m),
    .proc0_m2s(m_req[0]), .proc0_s2m(proc0_s2m), .proc0_irq(irq),
    .tcu_valid(tcu_valid), .tcu_ready(tcu_ready), .tcu_write(tcu_write), .tcu_addr(tcu_addr),
    .tcu_wdata(tcu_wdata), .tcu_rvalid(tcu_rvalid), .tcu_rdata(tcu_rdata), .tcu_err(tcu_err),
    .mem_hsel(mem_hsel), .mem_addr(mem_addr), .mem_hwdata(mem_hwdata), .mem_hready(mem_hready),
    .mem_hreadyout(mem_hreadyout), .mem_hresp(mem_hresp), .mem_hrdata(mem_hrdata),
    .srs_regs(srs_regs));

  tb_ahb_slave_model #(.WAIT(1)) u_mem (
    .clk(clk), .hsel(mem_hsel[0]), .haddr(mem_addr[0].haddr), .htrans(mem_addr[0].htrans),
    .hwrite(mem_addr[0].hwrite), .hmaster(mem_addr[0].hmaster), .hwdata(mem_hwdata[0]),
    .hready(mem_hready[0]), .hreadyout(mem_hreadyout[0]), .hresp(mem_hresp[0]),
    .hrdata(mem_hrdata[0]), .n_xfer(n_xfer), .n_bad_id(n_bad_id));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "tb_master_tasks.svh"

  int n_irq = 0, n_denied = 0, n_allowed = 0;
  always @(posedge clk) if (rstn) n_irq <= n_irq + $countones(irq);

  function automatic logic [31:0] region(int k);
    return MEM_BASE + 32'(k * 64);
  endfunction
  function automatic logic [31:0] prs_a(int mon, int ofs);
    return PRS_BASE + 32'(mon) * PRS_SPAN + 32'(ofs);
  endfunction

  task automatic tcu_wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    tcu_valid = 1; tcu_write = 1; tcu_addr = a; tcu_wdata = d;
    while (!tcu_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    tcu_valid = 0;
    while (!tcu_rvalid) @(negedge clk);
    check(!tcu_err, $sformatf("TCU write %h refused", a));
  endtask

  task automatic core_run(input int k);
    bit err; logic [31:0] rd; int cyc;
    bit own_ok;
    own_ok = (k == 1 || k == 2);
    for (int j = 0; j < 6; j++) begin
      logic [31:0] d;
      d = {8'(k), 8'(j), 16'($urandom)};
      mxfer(k, region(k) + 32'(4 * j), d, 1'b1, err, rd, cyc);
      check(err == !own_ok, $sformatf("core %0d write: error %0d", k, err));
      if (err) n_denied++; else n_allowed++;
      mxfer(k, region(k) + 32'(4 * j), 0, 1'b0, err, rd, cyc);
      check(err == !own_ok && (err || rd == d), $sformatf("core %0d read back %h expected %h", k, rd, d));
      if (err) n_denied++; else n_allowed++;
    end
    mxfer(k, region(k % NC + 1), 32'hFFFF_FFFF, 1'b1, err, rd, cyc);
    check(err, $sformatf("core %0d write to core %0d words not denied", k, k % NC + 1));
    n_denied++;
    mxfer(k, prs_a(0, 0), 32'hFFFF_FFFF, 1'b1, err, rd, cyc);
    check(err, "core PRS write not denied");
    mxfer(k, 32'hA000_0000, 0, 1'b0, err, rd, cyc);
    check(err, "unmapped access not answered with ERROR");
    if (k == 2) begin
      mxfer(k, region(k), 32'h0BAD_BEEF, 1'b1, err, rd, cyc);
      check(err, "DPU did not block the forbidden value");
      n_denied++;
    end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit err; logic [31:0] rd; int cyc, x0;
    m_req = '0;
    repeat (3) @(posedge clk);
    rstn = 1;
    for (int i = 0; i < 2; i++) begin
      tcu_wr(prs_a(0, 16 * i + 0),  32'(i + 1));
      tcu_wr(prs_a(0, 16 * i + 4),  region(i + 1));
      tcu_wr(prs_a(0, 16 * i + 8),  32'h0000_003F);
      tcu_wr(prs_a(0, 16 * i + 12), 32'h3);
    end
    tcu_wr(prs_a(0, 32'h2000 + 0),  32'h2);
    tcu_wr(prs_a(0, 32'h2000 + 4),  region(2));
    tcu_wr(prs_a(0, 32'h2000 + 8),  32'h0BAD_BEEF);
    tcu_wr(prs_a(0, 32'h2000 + 12), 32'h0000_003F);
    tcu_wr(prs_a(0, 32'h2000 + 16), 32'h0);
    mxfer(0, prs_a(NM, 0),  32'h1,             1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 4),  SRS_BASE + 32'h10, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 8),  32'h0000_000C,     1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 12), 32'h3,             1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");

    x0 = n_xfer;
    fork
      core_run(1); core_run(2); core_run(3); core_run(4);
    join
    repeat (3) @(posedge clk);
    check(n_xfer - x0 == n_allowed, $sformatf("memory saw %0d transfers, %0d were allowed", n_xfer - x0, n_allowed));
    check(n_bad_id == 0, $sformatf("%0d transfers with a wrong master ID", n_bad_id));

    // SRS: core 1 may use registers 4..7, core 2 none.
    mxfer(1, SRS_BASE + 32'h14, 32'hCAFE_0001, 1'b1, err, rd, cyc);
    check(!err, "core 1 SRS write");
    @(posedge clk);
    check(srs_regs[5] == 32'hCAFE_0001, "SRS register output follows the write");
    mxfer(2, SRS_BASE + 32'h14, 32'h0, 1'b1, err, rd, cyc);
    check(err && srs_regs[5] == 32'hCAFE_0001, "core 2 SRS write not denied");
    n_denied++;
    mxfer(1, SRS_BASE + 32'h20, 32'h1, 1'b1, err, rd, cyc);
    check(err && srs_regs[8] == 0, "core 1 write outside its SRS policy not denied");
    n_denied++;

    repeat (5) @(posedge clk);
    check(n_irq == n_denied, $sformatf("%0d interrupts for %0d denied requests", n_irq, n_denied));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
