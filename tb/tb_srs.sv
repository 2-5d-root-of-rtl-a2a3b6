// tb_srs -- self-checking testbench of the Shared Register Space.
// Word, halfword and byte writes and reads of all registers against a
// reference array, the two-cycle data phase of every transfer, reset to
// zero, and offsets past the last register (read zero, writes ignored).
module tb_srs;
  import isea_pkg::*;
  localparam int NR = 64;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic        hsel, hwrite, hready, hresp;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;
  logic [NR-1:0][31:0] gpcfg;

  srs #(.N_REGS(NR)) dut (
    .hclk(clk), .hresetn(rstn), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hsize(hsize), .hwdata(hwdata), .hready(hready), .hreadyout(hready), .hresp(hresp),
    .hrdata(hrdata), .gpcfg(gpcfg)
  );

  `include "tb_common.svh"

  logic [31:0] ref_r [NR];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit err; logic [31:0] rd; int cyc;
    hsel = 0; htrans = 0; haddr = 0; hwrite = 0; hmaster = 0; hsize = 3'b010; hwdata = 0;
    repeat (2) @(posedge clk);
    rstn = 1;
    check(gpcfg == '0, "registers not reset");
    for (int i = 0; i < NR; i++) ref_r[i] = 0;
    for (int n = 0; n < 1500; n++) begin
      int i; logic [31:0] d, a; logic [2:0] sz; bit wr;
      i  = $urandom_range(0, NR - 1);
      sz = 3'($urandom_range(0, 2));
      a  = SRS_BASE + 4 * i + (sz == 0 ? $urandom_range(0, 3) : sz == 1 ? 2 * $urandom_range(0, 1) : 0);
      d  = $urandom;
      wr = $urandom_range(0, 1) == 1;
      ahb_xfer(1, a, d, wr, err, rd, cyc, sz);
      check(!err && cyc == 2, $sformatf("transfer %0d: err %0d cyc %0d", n, err, cyc));
      if (wr) begin
        logic [3:0] ln;
        ln = byte_lanes(sz, a[1:0]);
        for (int b = 0; b < 4; b++) if (ln[b]) ref_r[i][8*b +: 8] = d[8*b +: 8];
      end else begin
        check(rd == ref_r[i], $sformatf("gpcfg%0d read %h expected %h", i, rd, ref_r[i]));
      end
    end
    @(negedge clk);
    for (int i = 0; i < NR; i++) check(gpcfg[i] == ref_r[i], $sformatf("gpcfg%0d output", i));
    ahb_xfer(1, SRS_BASE + 4 * NR, 32'hFFFF_FFFF, 1, err, rd, cyc);
    ahb_xfer(1, SRS_BASE + 4 * NR, 0, 0, err, rd, cyc);
    check(rd == 0, "register past the end reads non-zero");
    check(gpcfg[0] == ref_r[0], "write past the end wrapped around");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
