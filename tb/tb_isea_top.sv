// tb_isea_top -- end-to-end, self-checking testbench of the whole system at
// its full size (64 untrusted cores, 4 shared-memory chiplets of 1 MB, 16
// APU and 16 DPU policies per TRANSMON).  Behavioural bus masters stand in
// for the Cortex-M0 cores and PROC-0, a behavioural command source for the
// Trusted Configuration Unit.
//
// Sequence:
//  1. The TCU programs, through the Secure Interface, the policies of the
//     four memory TRANSMONs: core k owns one 4 kB region (APU policy, read
//     and write; core 32 read only), and core 2 may never write 0x0BAD_BEEF
//     anywhere in memory 0 (DPU policy with the values of the paper's key
//     example).  PROC-0 programs the SRS TRANSMON for a semaphore shared by
//     cores 1 and 2, and reads a policy back.
//  2. All 64 cores at once write their regions, including a marker word
//     (contention for the single bus, so bus interfaces stall).
//  3. All cores at once attack: write into the next core's region (APU
//     denial), write a PRS (denied to unprivileged masters) and touch an
//     unmapped address (default slave).  Core 2 tries the forbidden value
//     (DPU block) and writes an allowed one (one extra cycle), core 32
//     writes its read-only region (permission denial).
//  4. Cores 1 and 2 use the semaphore in the SRS; core 2's attempt to clear
//     it is blocked.  Then the paper's FFT example: two APU policies give
//     core 2 the SRS words around 0x4002_0070, where core 1 keeps its
//     result, and core 2's write there is denied.
//  5. Every core reads back its region: denied writes must have left no
//     trace.  Latencies are measured on an otherwise idle bus.
// The number of each mechanism seen is printed; one never seen is a failure.
// Interrupt pulses to PROC-0 are counted and must equal the denied requests.
module tb_isea_top;
  import isea_pkg::*;
  localparam int NC = N_CORES_DEF, NM = N_MEM_DEF;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  ahb_m2s_t [NC:0] m_req;   // 0 = PROC-0, k = core k
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

  // Mechanism counters.
  int n_tcu = 0, n_apu_deny = 0, n_perm_deny = 0, n_dpu_block = 0, n_dpu_delay = 0;
  int n_stall = 0, n_def_err = 0, n_prs_deny = 0, n_sem = 0, n_irq = 0, n_denied = 0, n_fft = 0;
  always @(posedge clk) if (rstn) n_irq <= n_irq + $countones(irq);

  localparam logic [31:0] SEM_A = SRS_BASE + 32'h9c;   // gpcfg39_reg
  localparam int BASE_CYC = 2;   // data-phase cycles seen by a master, idle bus

  function automatic logic [31:0] region(int k);   // core k's 4 kB region
    return MEM_BASE + 32'((k - 1) / 16) * MEM_SPAN + 32'((k - 1) % 16) * 32'h1000;
  endfunction
  function automatic logic [31:0] prs_a(int mon, int ofs);
    return PRS_BASE + 32'(mon) * PRS_SPAN + 32'(ofs);
  endfunction

  task automatic tcu_cmd(input bit wr, input logic [31:0] a, input logic [31:0] d,
                         output logic [31:0] rd, output bit err);
    @(negedge clk);
    tcu_valid = 1; tcu_write = wr; tcu_addr = a; tcu_wdata = d;
    while (!tcu_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    tcu_valid = 0;
    while (!tcu_rvalid) @(negedge clk);
    rd = tcu_rdata; err = tcu_err;
  endtask
  task automatic tcu_wr(input logic [31:0] a, input logic [31:0] d);
    logic [31:0] rd; bit err;
    tcu_cmd(1'b1, a, d, rd, err);
    check(!err, $sformatf("TCU write %h refused", a));
    if (!err) n_tcu++;
  endtask

  function automatic logic [31:0] pat(int k, int j);
    return {8'(k), 8'hA5, 16'(j * 977 + k)};
  endfunction

  // Phase 2: own region, 8 words plus the marker at +0x800.
  task automatic own_writes(input int k);
    bit err; logic [31:0] rd; int cyc;
    for (int j = 0; j < 8; j++) begin
      mxfer(k, region(k) + 32'(4 * j), pat(k, j), k != 32, err, rd, cyc);
      if (k == 32) check(!err, "read-only core may read");
      else check(!err, $sformatf("core %0d write own region", k));
      if (cyc > BASE_CYC + (k == 2)) n_stall++;
    end
    if (k != 32) begin
      mxfer(k, region(k) + 32'h800, ~pat(k, 99), 1'b1, err, rd, cyc);
      check(!err, "marker write");
      if (cyc > BASE_CYC + (k == 2)) n_stall++;
    end
  endtask

  // Phase 3: attacks.
  task automatic attacks(input int k);
    bit err; logic [31:0] rd; int cyc; int v;
    v = (k % NC) + 1;                                   // victim
    mxfer(k, region(v) + 32'h800, 32'hDEAD_0000 | 32'(k), 1'b1, err, rd, cyc);
    check(err, $sformatf("core %0d write into core %0d region not denied", k, v));
    if (err) begin n_apu_deny++; n_denied++; end
    mxfer(k, region(v) + 32'h800, 0, 1'b0, err, rd, cyc);
    check(err && rd == 0, $sformatf("core %0d read of core %0d region not denied", k, v));
    if (err) begin n_apu_deny++; n_denied++; end
    mxfer(k, prs_a((k - 1) / 16, 0), 32'(k), 1'b1, err, rd, cyc);
    check(err, $sformatf("core %0d PRS write not denied", k));
    if (err) n_prs_deny++;
    mxfer(k, 32'h9000_0000 + 32'(k * 4), 0, 1'b0, err, rd, cyc);
    check(err, "unmapped access not answered with ERROR");
    if (err) n_def_err++;
    if (k == 32) begin
      mxfer(k, region(k), 32'h1234_5678, 1'b1, err, rd, cyc);
      check(err, "write to read-only region not denied");
      if (err) begin n_perm_deny++; n_denied++; end
    end
    if (k == 2) begin
      mxfer(k, region(k) + 32'h10, 32'h0BAD_BEEF, 1'b1, err, rd, cyc);
      check(err, "DPU did not block the forbidden value");
      if (err) begin n_dpu_block++; n_denied++; end
    end
  endtask

  // Phase 5: read back.
  task automatic readback(input int k);
    bit err; logic [31:0] rd; int cyc;
    if (k == 32) return;
    for (int j = 0; j < 8; j++) begin
      mxfer(k, region(k) + 32'(4 * j), 0, 1'b0, err, rd, cyc);
      check(!err && rd == pat(k, j), $sformatf("core %0d word %0d read %h expected %h", k, j, rd, pat(k, j)));
    end
    mxfer(k, region(k) + 32'h800, 0, 1'b0, err, rd, cyc);
    check(!err && rd == ~pat(k, 99), $sformatf("core %0d marker %h overwritten", k, rd));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit err; logic [31:0] rd; int cyc, irq0;
    m_req = '0;
    repeat (3) @(posedge clk);
    rstn = 1;

    // 1. Policies.  Before any is loaded every access is denied.
    mxfer(1, region(1), 0, 1'b0, err, rd, cyc);
    check(err, "access before any policy is loaded must be denied");
    n_denied++;
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < 16; i++) begin
        int k;
        k = m * 16 + i + 1;
        tcu_wr(prs_a(m, 16 * i + 0),  32'(k));
        tcu_wr(prs_a(m, 16 * i + 4),  region(k));
        tcu_wr(prs_a(m, 16 * i + 8),  32'h0000_0FFF);
        tcu_wr(prs_a(m, 16 * i + 12), (k == 32) ? 32'h1 : 32'h3);
      end
    tcu_wr(prs_a(0, 32'h2000 + 0),  32'h0000_0002);
    tcu_wr(prs_a(0, 32'h2000 + 4),  32'h2000_FFFC);
    tcu_wr(prs_a(0, 32'h2000 + 8),  32'h0BAD_BEEF);
    tcu_wr(prs_a(0, 32'h2000 + 12), 32'h0FFF_FFFF);
    tcu_wr(prs_a(0, 32'h2000 + 16), 32'h0000_0000);
    tcu_cmd(1'b0, prs_a(1, 16 * 3 + 4), 0, rd, err);
    check(!err && rd == region(20), "TCU policy read-back");
    // PROC-0 programs the SRS monitor: cores 1 and 2 may use gpcfg39,
    // core 2 may never clear its bit 0.
    for (int i = 0; i < 2; i++) begin
      mxfer(0, prs_a(NM, 16 * i + 0),  32'(i + 1), 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
      mxfer(0, prs_a(NM, 16 * i + 4),  SEM_A,      1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
      mxfer(0, prs_a(NM, 16 * i + 8),  32'h0,      1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
      mxfer(0, prs_a(NM, 16 * i + 12), 32'h3,      1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    end
    mxfer(0, prs_a(NM, 32'h2000 + 0),  32'h2,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 32'h2000 + 4),  SEM_A,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 32'h2000 + 8),  32'h0,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 32'h2000 + 12), 32'h0,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 32'h2000 + 16), 32'hFFFF_FFFE, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 + 4), 0, 1'b0, err, rd, cyc);
    check(!err && rd == SEM_A, "PROC-0 policy read-back");

    // 2. Everyone writes at once.
    for (int k = 1; k <= NC; k++) fork
      automatic int kk = k;
      own_writes(kk);
    join_none
    wait fork;
    // 3. Everyone attacks at once.
    for (int k = 1; k <= NC; k++) fork
      automatic int kk = k;
      attacks(kk);
    join_none
    wait fork;

    // 4. Semaphore in gpcfg39.
    mxfer(1, SEM_A, 32'h1, 1'b1, err, rd, cyc);
    check(!err, "core 1 takes the semaphore");
    mxfer(2, SEM_A, 32'h0, 1'b1, err, rd, cyc);
    check(err, "core 2 clearing the semaphore not blocked");
    if (err) n_denied++;
    check(srs_regs[39] == 32'h1, "semaphore value kept");
    mxfer(1, SEM_A, 0, 1'b0, err, rd, cyc);
    check(!err && rd == 32'h1, "core 1 reads the semaphore");
    if (err == 0 && rd == 1 && srs_regs[39] == 1) n_sem++;
    mxfer(3, SEM_A, 0, 1'b0, err, rd, cyc);
    check(err, "core 3 has no access to the semaphore");
    if (err) n_denied++;

    // FFT example: core 2 may use 0x4002_0000..006C and 0x4002_0074..0FFF
    // of the SRS (two APU policies), but not 0x4002_0070, core 1's result.
    mxfer(0, prs_a(NM, 16 * 2 + 0),  32'h2,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 2 + 4),  32'h4002_006C, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 2 + 8),  32'h0000_006C, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 2 + 12), 32'h3,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 3 + 0),  32'h2,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 3 + 4),  32'h4002_0074, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 3 + 8),  32'h0000_0F8B, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 3 + 12), 32'h3,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 4 + 0),  32'h1,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 4 + 4),  32'h4002_0070, 1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 4 + 8),  32'h0,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(0, prs_a(NM, 16 * 4 + 12), 32'h3,         1'b1, err, rd, cyc); check(!err, "PROC-0 PRS write");
    mxfer(1, SRS_BASE + 32'h70, 32'h0000_0001, 1'b1, err, rd, cyc);
    check(!err, "core 1 stores its result");
    mxfer(2, SRS_BASE + 32'h6C, 32'h0000_0002, 1'b1, err, rd, cyc);
    check(!err && srs_regs[27] == 32'h2, "core 2 write at 0x4002_006C");
    mxfer(2, SRS_BASE + 32'h74, 32'h0000_0002, 1'b1, err, rd, cyc);
    check(!err && srs_regs[29] == 32'h2, "core 2 write at 0x4002_0074");
    mxfer(2, SRS_BASE + 32'h70, 32'h0000_0002, 1'b1, err, rd, cyc);
    check(err && srs_regs[28] == 32'h1, "core 2 write at 0x4002_0070 not denied");
    if (err) begin n_apu_deny++; n_denied++; n_fft++; end

    // 5. Read back and latencies on an idle bus.
    for (int k = 1; k <= NC; k++) fork
      automatic int kk = k;
      readback(kk);
    join_none
    wait fork;
    mxfer(5, region(5) + 32'h40, 32'h5555_0005, 1'b1, err, rd, cyc);
    check(!err && cyc == BASE_CYC, $sformatf("approved write took %0d cycles, expected %0d", cyc, BASE_CYC));
    mxfer(5, region(6) + 32'h40, 32'h5555_0005, 1'b1, err, rd, cyc);
    check(err && cyc == BASE_CYC, $sformatf("denied write took %0d cycles, expected %0d", cyc, BASE_CYC));
    n_denied++;
    mxfer(2, region(2) + 32'h40, 32'h2222_0002, 1'b1, err, rd, cyc);
    check(!err && cyc == BASE_CYC + 1, $sformatf("DPU-checked write took %0d cycles, expected %0d", cyc, BASE_CYC + 1));
    if (!err && cyc == BASE_CYC + 1) n_dpu_delay++;
    mxfer(2, region(2) + 32'h44, 32'h0BAD_BEEF, 1'b1, err, rd, cyc);
    check(err && cyc == BASE_CYC + 1, $sformatf("DPU-blocked write took %0d cycles, expected %0d", cyc, BASE_CYC + 1));
    if (err) begin n_dpu_block++; n_denied++; end
    mxfer(2, region(2) + 32'h44, 0, 1'b0, err, rd, cyc);
    check(!err && cyc == BASE_CYC, "DPU does not delay reads");
    // The SI is privileged for the PRS only; memory it reaches through
    // the TRANSMON like anyone else.
    tcu_cmd(1'b0, region(1), 0, rd, err);
    check(err, "TCU memory read without policy must be denied");
    if (err) n_denied++;

    repeat (5) @(posedge clk);
    check(n_irq == n_denied, $sformatf("%0d interrupts for %0d denied requests", n_irq, n_denied));
    $display("mechanisms: tcu_loads=%0d apu_denials=%0d perm_denials=%0d dpu_blocks=%0d dpu_delays=%0d",
             n_tcu, n_apu_deny, n_perm_deny, n_dpu_block, n_dpu_delay);
    $display("mechanisms: bus_stalls=%0d default_slave=%0d prs_denials=%0d semaphore=%0d irqs=%0d",
             n_stall, n_def_err, n_prs_deny, n_sem, n_irq);
    $display("mechanisms: fft_range_protection=%0d", n_fft);
    check(n_tcu > 0, "mechanism never seen: TCU policy load");
    check(n_apu_deny > 0, "mechanism never seen: APU denial");
    check(n_perm_deny > 0, "mechanism never seen: permission denial");
    check(n_dpu_block > 0, "mechanism never seen: DPU block");
    check(n_dpu_delay > 0, "mechanism never seen: DPU-delayed write");
    check(n_stall > 0, "mechanism never seen: bus contention stall");
    check(n_def_err > 0, "mechanism never seen: default slave error");
    check(n_prs_deny > 0, "mechanism never seen: PRS access denial");
    check(n_sem > 0, "mechanism never seen: semaphore protection");
    check(n_irq > 0, "mechanism never seen: interrupt to PROC-0");
    check(n_fft > 0, "mechanism never seen: FFT result-range protection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
