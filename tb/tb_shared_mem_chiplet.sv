// tb_shared_mem_chiplet -- self-checking testbench of the shared-memory
// chiplet (AHB-Lite controller over 16 x 64 kB macros).
// Random word, halfword and byte transfers spread over all 16 macros of the
// 1 MB space (including the same row in every macro) against a sparse
// reference; every data phase must take two
// cycles (one wait state) and answer OKAY.
module tb_shared_mem_chiplet;
  import isea_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic        hsel, hwrite, hready, hresp;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;

  shared_mem_chiplet dut (
    .hclk(clk), .hresetn(rstn), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hsize(hsize), .hwdata(hwdata), .hready(hready), .hreadyout(hready), .hresp(hresp),
    .hrdata(hrdata)
  );

  `include "tb_common.svh"

  logic [31:0] ref_m [int];
  logic [31:0] words [$];

  initial begin
    repeat (100000) @(posedge clk);
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
    // one word in every macro, plus random words
    for (int b = 0; b < 16; b++) words.push_back(32'h2000_0000 + b * 32'h1_0000 + 4 * $urandom_range(0, 16383));
    // the same row in every macro: the macros must not alias
    for (int b = 0; b < 16; b++) words.push_back(32'h2000_0040 + b * 32'h1_0000);
    for (int n = 0; n < 48; n++) words.push_back(32'h2000_0000 + 4 * $urandom_range(0, 262143));
    foreach (words[k]) begin
      logic [31:0] d; d = $urandom;
      ahb_xfer(3, words[k], d, 1, err, rd, cyc);
      check(!err && cyc == 2, $sformatf("write %h: err %0d cyc %0d", words[k], err, cyc));
      ref_m[int'(words[k][19:2])] = d;
    end
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] a, d; logic [2:0] sz; bit wr; int w;
      a  = words[$urandom_range(0, words.size() - 1)];
      sz = 3'($urandom_range(0, 2));
      if (sz == 0) a += $urandom_range(0, 3);
      if (sz == 1) a += 2 * $urandom_range(0, 1);
      wr = $urandom_range(0, 1) == 1;
      d  = $urandom;
      w  = int'(a[19:2]);
      ahb_xfer(3, a, d, wr, err, rd, cyc, sz);
      check(!err && cyc == 2, $sformatf("transfer %h: err %0d cyc %0d", a, err, cyc));
      if (wr) begin
        logic [3:0] ln; ln = byte_lanes(sz, a[1:0]);
        for (int b = 0; b < 4; b++) if (ln[b]) ref_m[w][8*b +: 8] = d[8*b +: 8];
      end else begin
        check(rd == ref_m[w], $sformatf("read %h got %h expected %h", a, rd, ref_m[w]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
