// tb_isea_fft -- FFT workload on the full-size system, with memory-range
// protection.  A 256-point complex FFT is split Cooley-Tukey style as
// 256 = 32 x 8: core c (c = 0..31) takes the samples x[c + 32*n], n = 0..7,
// computes their 8-point DFT, multiplies output k by the twiddle
// exp(-2*pi*i*c*k/256) and stores the 8 results in its own 4 kB region
// of shared memory; PROC-0 then gathers all partial results and finishes
// the 32-point transforms: X[k + 8*j] = sum_c Y[c][k] * exp(-2*pi*i*c*j/32).
// The result is compared with a direct 256-point DFT of the same input.
//
// Roles (behavioural): the configuration unit loads the policies through
// the Secure Interface; PROC-0 places the input in each core's region,
// starts the cores (an event stands in for its interrupt) and collects the
// results.  Policies per memory chiplet: one read-write policy for PROC-0
// over the whole chiplet, one read-write policy per core over its region
// (8 cores per chiplet).  While the cores compute, cores 40 and 50 (no
// policy) keep trying to overwrite core 1's intermediate results, and each
// computing core, once done, tries to overwrite its neighbour's; every
// attempt must be denied, and the FFT must still come out right.
// Samples are 32-bit signed integers (real and imaginary part in two
// words); cores round their partial results to integers.
module tb_isea_fft;
  import isea_pkg::*;
  localparam int NC = N_CORES_DEF, NM = N_MEM_DEF;
  localparam int N = 256, N1 = 32, N2 = 8;
  localparam real PI = 3.14159265358979323846;

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

  for (genvar k = 1; k <= NC; k++) begin : g_core
    assign core_m2s[k-1] = m_req[k];
    assign m_rsp[k]      = core_s2m[k-1];
  end
  assign m_rsp[0] = proc0_s2m;

  isea_top dut (
    .hclk(clk), .hresetn(rstn), .core_m2s(core_m2s), .core_s2m(core_s2m),
    .proc0_m2s(m_req[0]), .proc0_s2m(proc0_s2m), .proc0_irq(irq),
    .tcu_valid(tcu_valid), .tcu_ready(tcu_ready), .tcu_write(tcu_write), .tcu_addr(tcu_addr),
    .tcu_wdata(tcu_wdata), .tcu_rvalid(tcu_rvalid), .tcu_rdata(tcu_rdata), .tcu_err(tcu_err),
    .srs_regs(srs_regs));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "tb_master_tasks.svh"

  int n_irq = 0, n_attack = 0, n_denied = 0;
  always @(posedge clk) if (rstn) n_irq <= n_irq + $countones(irq);

  // Core c (0..31) is bus master c+1; its region holds the 8 input samples
  // at +0x000 and the 8 partial results at +0x100 (re, im word pairs).
  function automatic logic [31:0] region(int c);
    return MEM_BASE + 32'(c / 8) * MEM_SPAN + 32'(c % 8) * 32'h1000;
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
    check(!tcu_err, $sformatf("policy load at %h refused", a));
  endtask

  task automatic wr(input int m, input logic [31:0] a, input logic [31:0] d);
    bit err; logic [31:0] rd; int cyc;
    mxfer(m, a, d, 1'b1, err, rd, cyc);
    check(!err, $sformatf("master %0d write %h refused", m, a));
  endtask
  task automatic rd32(input int m, input logic [31:0] a, output int v);
    bit err; logic [31:0] rd; int cyc;
    mxfer(m, a, 0, 1'b0, err, rd, cyc);
    check(!err, $sformatf("master %0d read %h refused", m, a));
    v = int'(rd);
  endtask

  int  xr [N], xi [N];
  event start;
  bit  compute_done = 0;
  int  n_cores_done = 0;

  task automatic core_fft(input int c);
    int ar [N2], ai [N2];
    @(start);
    for (int n = 0; n < N2; n++) begin
      rd32(c + 1, region(c) + 32'(8 * n), ar[n]);
      rd32(c + 1, region(c) + 32'(8 * n + 4), ai[n]);
    end
    for (int k = 0; k < N2; k++) begin
      real sr, si, wr_, wi_, tr, ti;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N2; n++) begin
        wr_ = $cos(-2.0 * PI * n * k / N2);
        wi_ = $sin(-2.0 * PI * n * k / N2);
        sr += ar[n] * wr_ - ai[n] * wi_;
        si += ar[n] * wi_ + ai[n] * wr_;
      end
      wr_ = $cos(-2.0 * PI * c * k / N);
      wi_ = $sin(-2.0 * PI * c * k / N);
      tr = sr * wr_ - si * wi_;
      ti = sr * wi_ + si * wr_;
      wr(c + 1, region(c) + 32'h100 + 32'(8 * k), 32'($rtoi(tr + (tr < 0 ? -0.5 : 0.5))));
      wr(c + 1, region(c) + 32'h104 + 32'(8 * k), 32'($rtoi(ti + (ti < 0 ? -0.5 : 0.5))));
    end
    // Having finished, the core tries to overwrite its neighbour's results.
    begin
      bit err; logic [31:0] rd; int cyc;
      mxfer(c + 1, region((c + 1) % N1) + 32'h100, 32'h7FFF_FFFF, 1'b1, err, rd, cyc);
      n_attack++;
      check(err, $sformatf("core %0d overwrote core %0d's partial result", c + 1, (c + 1) % N1 + 1));
      if (err) n_denied++;
    end
    n_cores_done++;
  endtask

  task automatic attacker(input int m);
    bit err; logic [31:0] rd; int cyc;
    @(start);
    while (!compute_done) begin
      mxfer(m, region(0) + 32'h100 + 32'(4 * $urandom_range(0, 15)), 32'h7FFF_FFFF, 1'b1, err, rd, cyc);
      n_attack++;
      check(err, $sformatf("core %0d overwrote core 1's partial result", m));
      if (err) n_denied++;
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int yr [N1][N2], yi [N1][N2];
    int maxerr;
    m_req = '0;
    for (int n = 0; n < N; n++) begin
      xr[n] = $urandom_range(0, 2000) - 1000;
      xi[n] = $urandom_range(0, 2000) - 1000;
    end
    repeat (3) @(posedge clk);
    rstn = 1;

    // Policies, loaded by the configuration unit.
    for (int m = 0; m < NM; m++) begin
      tcu_wr(prs_a(m, 0), 32'h0);
      tcu_wr(prs_a(m, 4), MEM_BASE + 32'(m) * MEM_SPAN);
      tcu_wr(prs_a(m, 8), 32'h000F_FFFF);
      tcu_wr(prs_a(m, 12), 32'h3);
      for (int i = 0; i < 8; i++) begin
        int c;
        c = m * 8 + i;
        tcu_wr(prs_a(m, 16 * (i + 1) + 0),  32'(c + 1));
        tcu_wr(prs_a(m, 16 * (i + 1) + 4),  region(c));
        tcu_wr(prs_a(m, 16 * (i + 1) + 8),  32'h0000_0FFF);
        tcu_wr(prs_a(m, 16 * (i + 1) + 12), 32'h3);
      end
    end
    // PROC-0 arranges the input: core c gets x[c + 32*n].
    for (int c = 0; c < N1; c++)
      for (int n = 0; n < N2; n++) begin
        wr(0, region(c) + 32'(8 * n),     32'(xr[c + N1 * n]));
        wr(0, region(c) + 32'(8 * n + 4), 32'(xi[c + N1 * n]));
      end

    for (int c = 0; c < N1; c++) fork
      automatic int cc = c;
      core_fft(cc);
    join_none
    fork
      attacker(40);
      attacker(50);
    join_none
    #1;
    ->start;
    wait (n_cores_done == N1);
    // All partial results are stored: stop the attackers and wait for their
    // last attempt.
    compute_done = 1;
    wait fork;

    // PROC-0 gathers and finishes.
    for (int c = 0; c < N1; c++)
      for (int k = 0; k < N2; k++) begin
        rd32(0, region(c) + 32'h100 + 32'(8 * k), yr[c][k]);
        rd32(0, region(c) + 32'h104 + 32'(8 * k), yi[c][k]);
      end
    maxerr = 0;
    for (int k = 0; k < N2; k++)
      for (int j = 0; j < N1; j++) begin
        real sr, si, rr, ri;
        int e;
        sr = 0.0; si = 0.0;
        for (int c = 0; c < N1; c++) begin
          sr += yr[c][k] * $cos(-2.0 * PI * c * j / N1) - yi[c][k] * $sin(-2.0 * PI * c * j / N1);
          si += yr[c][k] * $sin(-2.0 * PI * c * j / N1) + yi[c][k] * $cos(-2.0 * PI * c * j / N1);
        end
        rr = 0.0; ri = 0.0;
        for (int n = 0; n < N; n++) begin
          rr += xr[n] * $cos(-2.0 * PI * n * (k + N2 * j) / N) - xi[n] * $sin(-2.0 * PI * n * (k + N2 * j) / N);
          ri += xr[n] * $sin(-2.0 * PI * n * (k + N2 * j) / N) + xi[n] * $cos(-2.0 * PI * n * (k + N2 * j) / N);
        end
        e = $rtoi((sr > rr ? sr - rr : rr - sr) + (si > ri ? si - ri : ri - si));
        if (e > maxerr) maxerr = e;
        check(e < 64, $sformatf("X[%0d] = (%0.1f, %0.1f), direct DFT (%0.1f, %0.1f)", k + N2 * j, sr, si, rr, ri));
      end
    repeat (5) @(posedge clk);
    $display("FFT: %0d points, largest error %0d, %0d attacks on partial results, %0d denied, %0d interrupts",
             N, maxerr, n_attack, n_denied, n_irq);
    check(n_attack > 0 && n_denied == n_attack, "attacks on intermediate results not all denied");
    check(n_irq == n_denied, $sformatf("%0d interrupts for %0d denied requests", n_irq, n_denied));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
