// tb_transmon -- self-checking testbench of the TRANSMON.
//
// Plays the AHB-Lite bus toward the TRANSMON (one transfer at a time) and a
// one-wait-state memory behind it, loads policies straight into the policy
// inputs and replays the three published scenarios:
//   * APU: core 2 may use 0x4002_0000..0x4002_006C (mask 0x6C) and
//     0x4002_0074..0x4002_0FFF (mask 0xF8B); its write of 2 to 0x4002_0070
//     must be dropped with ERROR;
//   * DPU: core 2 may not write 0x0BAD_BEEF anywhere in 0x2000_0000..
//     0x2FFF_FFFF; other data and other cores pass;
//   * semaphore: core 2 may not clear bit 0 of gpcfg39 (0x4002_009C).
// For every transfer it checks the response (OKAY/ERROR), the read data,
// the data-phase length (2 cycles, 3 for DPU-covered writes), whether the
// memory saw the transfer, the memory contents and the interrupt pulse.
module tb_transmon;
  import isea_pkg::*;

  localparam int NA = 16, ND = 16;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  apu_policy_t [NA-1:0] apu_pol;
  dpu_policy_t [ND-1:0] dpu_pol;
  logic        hsel, hwrite, hready, hreadyout, hresp, irq;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;
  logic        hsel_s, hwrite_s, hready_s, hreadyout_s, hresp_s;
  logic [31:0] haddr_s, hmaster_s, hwdata_s, hrdata_s;
  logic [1:0]  htrans_s;
  logic [2:0]  hsize_s;

  assign hready = hreadyout;   // the TRANSMON is the only slave here

  transmon #(.N_APU(NA), .N_DPU(ND)) dut (
    .hclk(clk), .hresetn(rstn), .apu_pol(apu_pol), .dpu_pol(dpu_pol),
    .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite), .hsize(hsize),
    .hmaster(hmaster), .hwdata(hwdata), .hready(hready),
    .hreadyout(hreadyout), .hresp(hresp), .hrdata(hrdata),
    .hsel_s(hsel_s), .haddr_s(haddr_s), .htrans_s(htrans_s), .hwrite_s(hwrite_s),
    .hsize_s(hsize_s), .hmaster_s(hmaster_s), .hwdata_s(hwdata_s), .hready_s(hready_s),
    .hreadyout_s(hreadyout_s), .hresp_s(hresp_s), .hrdata_s(hrdata_s), .irq(irq)
  );

  // ---- memory behind the TRANSMON: one wait state, 1024 words
  logic [31:0] mem [1024];
  logic [1:0]  mst;
  logic [9:0]  ma_q;
  logic        mw_q;
  logic [31:0] mrd;
  always_ff @(posedge clk) begin
    if (!rstn) begin
      mst <= 2'd0;
    end else if (mst == 2'd1) begin
      mst <= 2'd2;
      if (mw_q) mem[ma_q] <= hwdata_s; else mrd <= mem[ma_q];
    end else if (hsel_s && htrans_s[1] && hready_s) begin
      mst  <= 2'd1;
      ma_q <= haddr_s[11:2];
      mw_q <= hwrite_s;
    end else if (hready_s) begin
      mst <= 2'd0;
    end
  end
  assign hreadyout_s = (mst != 2'd1);
  assign hresp_s     = 1'b0;
  assign hrdata_s    = (mst == 2'd2 && !mw_q) ? mrd : 32'h0;

  // ---- monitors
  int sel_cnt = 0, irq_cnt = 0;
  always @(posedge clk) begin
    if (rstn && hsel_s && htrans_s[1] && hready_s) sel_cnt++;
    if (rstn && irq) irq_cnt++;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One transfer; returns response, read data and data-phase cycles.
  task automatic xfer(input logic [31:0] mid, input logic [31:0] a, input logic [31:0] d,
                      input bit wr, output bit err, output logic [31:0] rd, output int cyc);
    @(negedge clk);
    hsel = 1'b1; htrans = HTRANS_NONSEQ; haddr = a; hwrite = wr; hmaster = mid;
    hsize = HSIZE_WORD; hwdata = 32'h0001_0000;   // stale value during address phase
    @(posedge clk);
    @(negedge clk);
    hsel = 1'b0; htrans = HTRANS_IDLE; haddr = 32'h0; hwrite = 1'b0; hmaster = 32'h0;
    hwdata = d;
    cyc = 1;
    while (!hready) begin
      @(negedge clk);
      cyc++;
    end
    err = hresp;
    rd  = hrdata;
    @(posedge clk);
  endtask

  // Transfer plus the checks every transfer gets.
  task automatic run(input string name, input logic [31:0] mid, input logic [31:0] a,
                     input logic [31:0] d, input bit wr, input bit exp_err, input int exp_cyc,
                     input logic [31:0] exp_rd = 32'h0);
    bit err; logic [31:0] rd; int cyc; int s0, i0;
    s0 = sel_cnt; i0 = irq_cnt;
    xfer(mid, a, d, wr, err, rd, cyc);
    @(negedge clk);
    check(err == exp_err, $sformatf("%s: response %0d, expected %0d", name, err, exp_err));
    check(cyc == exp_cyc, $sformatf("%s: %0d data-phase cycles, expected %0d", name, cyc, exp_cyc));
    check((sel_cnt - s0) == (exp_err ? 0 : 1), $sformatf("%s: memory saw %0d transfers", name, sel_cnt - s0));
    check((irq_cnt - i0) == (exp_err ? 1 : 0), $sformatf("%s: %0d interrupts", name, irq_cnt - i0));
    if (!wr && !exp_err)
      check(rd == exp_rd, $sformatf("%s: read %h, expected %h", name, rd, exp_rd));
    if (exp_err)
      check(rd == 32'h0, $sformatf("%s: data %h leaked on ERROR", name, rd));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hsel = 0; htrans = HTRANS_IDLE; haddr = 0; hwrite = 0; hmaster = 0; hsize = HSIZE_WORD; hwdata = 0;
    apu_pol = '0; dpu_pol = '0;
    for (int i = 0; i < 1024; i++) mem[i] = 32'h0;
    repeat (3) @(posedge clk);
    rstn = 1'b1;

    // Deny by default: no policies at all.
    run("no policy read", 32'd2, 32'h4002_0074, 0, 1'b0, 1'b1, 2);

    // APU scenario (values of the published example).
    apu_pol[0] = '{mid: 32'h2, addr: 32'h4002_006C, mask: 32'h0000_006C, perm: 32'h3};
    apu_pol[1] = '{mid: 32'h2, addr: 32'h4002_0074, mask: 32'h0000_0F8B, perm: 32'h3};
    run("APU write 4002_0070 by 2", 32'd2, 32'h4002_0070, 32'h2, 1'b1, 1'b1, 2);
    check(mem[10'h1C] == 32'h0, "APU: protected word changed");
    run("APU write 4002_0074 by 2", 32'd2, 32'h4002_0074, 32'hCAFE_0001, 1'b1, 1'b0, 2);
    check(mem[10'h1D] == 32'hCAFE_0001, "APU: allowed write not in memory");
    run("APU read 4002_0074 by 2", 32'd2, 32'h4002_0074, 0, 1'b0, 1'b0, 2, 32'hCAFE_0001);
    run("APU write 4002_0FFC by 2", 32'd2, 32'h4002_0FFC, 32'h5, 1'b1, 1'b0, 2);
    run("APU write 4002_0000 by 2", 32'd2, 32'h4002_0000, 32'h6, 1'b1, 1'b0, 2);
    run("APU write 4002_006C by 2", 32'd2, 32'h4002_006C, 32'h7, 1'b1, 1'b0, 2);
    run("APU write 4002_1000 by 2", 32'd2, 32'h4002_1000, 32'h8, 1'b1, 1'b1, 2);
    run("APU read 4002_0074 by 1", 32'd1, 32'h4002_0074, 0, 1'b0, 1'b1, 2);
    // read-only policy for core 3
    apu_pol[2] = '{mid: 32'h3, addr: 32'h4002_0074, mask: 32'h0000_0F8B, perm: 32'h1};
    run("read-only policy read", 32'd3, 32'h4002_0074, 0, 1'b0, 1'b0, 2, 32'hCAFE_0001);
    run("read-only policy write", 32'd3, 32'h4002_0074, 32'h9, 1'b1, 1'b1, 2);
    check(mem[10'h1D] == 32'hCAFE_0001, "read-only word changed");
    apu_pol[2].perm = 32'h2;   // write-only
    run("write-only policy read", 32'd3, 32'h4002_0074, 0, 1'b0, 1'b1, 2);

    // DPU scenario.
    apu_pol[3] = '{mid: 32'h2, addr: 32'h2000_0000, mask: 32'h0FFF_FFFF, perm: 32'h3};
    apu_pol[4] = '{mid: 32'h1, addr: 32'h2000_0000, mask: 32'h0FFF_FFFF, perm: 32'h3};
    dpu_pol[1] = '{mid: 32'h2, addr: 32'h2000_FFFC, data: 32'h0BAD_BEEF,
                   amask: 32'h0FFF_FFFF, dmask: 32'h0000_0000};
    run("DPU write key by 2", 32'd2, 32'h2001_FFE8, 32'h0BAD_BEEF, 1'b1, 1'b1, 3);
    check(mem[10'h3FA] == 32'h0, "DPU: key reached memory");
    run("DPU write other data by 2", 32'd2, 32'h2001_FFE8, 32'h00EF_BE00, 1'b1, 1'b0, 3);
    check(mem[10'h3FA] == 32'h00EF_BE00, "DPU: allowed data not in memory");
    run("DPU read by 2", 32'd2, 32'h2001_FFE8, 0, 1'b0, 1'b0, 2, 32'h00EF_BE00);
    run("DPU write key by 1", 32'd1, 32'h2000_003C, 32'h0BAD_BEEF, 1'b1, 1'b0, 2);
    run("DPU read by 1", 32'd1, 32'h2000_003C, 0, 1'b0, 1'b0, 2, 32'h0BAD_BEEF);

    // Semaphore scenario.
    apu_pol[5] = '{mid: 32'h1, addr: 32'h4002_0000, mask: 32'h0000_0FFF, perm: 32'h3};
    apu_pol[6] = '{mid: 32'h2, addr: 32'h4002_0000, mask: 32'h0000_0FFF, perm: 32'h3};
    dpu_pol[2] = '{mid: 32'h2, addr: 32'h4002_009C, data: 32'h0000_0000,
                   amask: 32'h0000_0000, dmask: 32'hFFFF_FFFE};
    run("sem acquire by 1", 32'd1, 32'h4002_009C, 32'h1, 1'b1, 1'b0, 2);
    run("sem clear by 2", 32'd2, 32'h4002_009C, 32'h0, 1'b1, 1'b1, 3);
    check(mem[10'h27] == 32'h1, "semaphore overwritten");
    run("sem write 0x10 by 2", 32'd2, 32'h4002_009C, 32'h10, 1'b1, 1'b1, 3);
    run("sem write 0x3 by 2", 32'd2, 32'h4002_009C, 32'h3, 1'b1, 1'b0, 3);
    check(mem[10'h27] == 32'h3, "semaphore write with bit 0 set lost");
    run("read 4002_00CC by 1", 32'd1, 32'h4002_00CC, 0, 1'b0, 1'b0, 2, 32'h0);
    run("sem clear by 1", 32'd1, 32'h4002_009C, 32'h0, 1'b1, 1'b0, 2);

    // Random cross-check of the APU against an independent model.
    for (int n = 0; n < 200; n++) begin
      logic [31:0] a, mid; bit wr, exp_ok;
      a   = 32'h4002_0000 | ($urandom_range(0, 511) << 2);
      mid = $urandom_range(1, 3);
      wr  = 1'b0;
      // core 1 and 2 may use the whole 4 KiB window; core 3 only 0x74/0xF8B write-only
      exp_ok = (mid != 3);
      run($sformatf("random read %h by %0d", a, mid), mid, a, 0, wr, !exp_ok, 2, mem[a[11:2]]);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
