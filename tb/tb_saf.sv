// tb_saf -- self-checking testbench of the Slave Access Filter.
// The APU and DPU verdicts are driven by the testbench; a one-wait-state
// memory model sits on the slave side.  Checks, per case, the response, the
// data-phase length (2 forwarded or denied, 3 when a DPU policy covers the
// write), that denied transfers never select the memory and leave its
// signals at zero, that a held write is replayed with the registered address
// and master ID, and the interrupt pulse.
module tb_saf;
  import isea_pkg::*;
  localparam int ND = 4;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic        hsel, hwrite, hready, hresp;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;
  logic        apu_allow, dpu_block;
  logic [ND-1:0] dpu_cover, dpu_cover_q;
  logic        hsel_s, hwrite_s, hready_s, hreadyout_s;
  logic [31:0] haddr_s, hmaster_s, hwdata_s, hrdata_s;
  logic [1:0]  htrans_s;
  logic [2:0]  hsize_s;
  logic        use_slave, own_ready, own_resp, irq;

  saf #(.N_DPU(ND)) dut (
    .hclk(clk), .hresetn(rstn), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hsize(hsize), .hmaster(hmaster), .hwdata(hwdata), .hready(hready),
    .apu_allow(apu_allow), .dpu_cover(dpu_cover), .dpu_cover_q(dpu_cover_q), .dpu_block(dpu_block),
    .hsel_s(hsel_s), .haddr_s(haddr_s), .htrans_s(htrans_s), .hwrite_s(hwrite_s), .hsize_s(hsize_s),
    .hmaster_s(hmaster_s), .hwdata_s(hwdata_s), .hready_s(hready_s),
    .use_slave(use_slave), .own_ready(own_ready), .own_resp(own_resp), .irq(irq)
  );

  // response multiplexer as in the TRANSMON
  assign hready = use_slave ? hreadyout_s : own_ready;
  assign hresp  = use_slave ? 1'b0 : own_resp;
  assign hrdata = use_slave ? hrdata_s : 32'h0;

  // memory model, one wait state
  logic [31:0] mem [256];
  logic [1:0] mst; logic [7:0] ma_q; logic mw_q; logic [31:0] mrd, mmid_q;
  always_ff @(posedge clk) begin
    if (!rstn) mst <= 0;
    else if (mst == 1) begin
      mst <= 2;
      if (mw_q) mem[ma_q] <= hwdata_s; else mrd <= mem[ma_q];
    end else if (hsel_s && htrans_s[1] && hready_s) begin
      mst <= 1; ma_q <= haddr_s[9:2]; mw_q <= hwrite_s; mmid_q <= hmaster_s;
    end else if (hready_s) mst <= 0;
  end
  assign hreadyout_s = (mst != 1);
  assign hrdata_s    = (mst == 2 && !mw_q) ? mrd : 32'h0;

  int sel_cnt = 0, irq_cnt = 0, leak = 0;
  always @(posedge clk) if (rstn) begin
    if (hsel_s && htrans_s[1] && hready_s) sel_cnt++;
    if (irq) irq_cnt++;
    if (!hsel_s && (haddr_s != 0 || hmaster_s != 0)) leak++;
  end

  `include "tb_common.svh"

  // The DPU verdict follows hwdata in the data phase: block when it is BAD.
  localparam logic [31:0] BAD = 32'h0BAD_BEEF;
  assign dpu_block = (|dpu_cover_q) && (hwdata == BAD);

  task automatic run(input string name, input bit allow, input bit cov, input logic [31:0] mid,
                     input logic [31:0] a, input logic [31:0] d, input bit wr,
                     input bit exp_err, input int exp_cyc, input logic [31:0] exp_rd = 0);
    bit err; logic [31:0] rd; int cyc, s0, i0;
    s0 = sel_cnt; i0 = irq_cnt;
    apu_allow = allow; dpu_cover = cov ? 4'b0010 : 4'b0000;
    ahb_xfer(mid, a, d, wr, err, rd, cyc);
    @(negedge clk);
    check(err == exp_err, $sformatf("%s: resp %0d", name, err));
    check(cyc == exp_cyc, $sformatf("%s: %0d cycles, expected %0d", name, cyc, exp_cyc));
    check((sel_cnt - s0) == (exp_err ? 0 : 1), $sformatf("%s: memory saw %0d", name, sel_cnt - s0));
    check((irq_cnt - i0) == (exp_err ? 1 : 0), $sformatf("%s: irq %0d", name, irq_cnt - i0));
    if (!wr && !exp_err) check(rd == exp_rd, $sformatf("%s: read %h", name, rd));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hsel = 0; htrans = 0; haddr = 0; hwrite = 0; hmaster = 0; hsize = 3'b010; hwdata = 0;
    apu_allow = 0; dpu_cover = 0;
    for (int i = 0; i < 256; i++) mem[i] = 0;
    repeat (2) @(posedge clk);
    rstn = 1;
    run("allowed write", 1, 0, 7, 32'h10, 32'h1111_0000, 1, 0, 2);
    check(mem[4] == 32'h1111_0000, "allowed write lost");
    check(mmid_q == 7, "master ID not forwarded");
    run("allowed read", 1, 0, 7, 32'h10, 0, 0, 0, 2, 32'h1111_0000);
    run("denied write", 0, 0, 7, 32'h14, 32'h2222_0000, 1, 1, 2);
    check(mem[5] == 0, "denied write reached memory");
    run("denied read", 0, 0, 7, 32'h10, 0, 0, 1, 2);
    run("covered write, clean data", 1, 1, 9, 32'h18, 32'h3333_0000, 1, 0, 3);
    check(mem[6] == 32'h3333_0000, "replayed write lost");
    check(mmid_q == 9, "replayed master ID wrong");
    run("covered write, restricted data", 1, 1, 9, 32'h1C, BAD, 1, 1, 3);
    check(mem[7] == 0, "restricted data reached memory");
    run("denied and covered", 0, 1, 9, 32'h1C, 32'h1, 1, 1, 2);
    check(leak == 0, "memory-side address or ID driven while idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
