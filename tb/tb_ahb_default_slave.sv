// tb_ahb_default_slave -- self-checking testbench of the default slave.
// A selected NONSEQ transfer must get the two-cycle ERROR (HREADYOUT low
// with HRESP high, then both high); an unselected or IDLE cycle must leave
// it at OKAY with HREADYOUT high.
module tb_ahb_default_slave;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  logic        hsel, hwrite, hready, hresp;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;

  ahb_default_slave dut (.hclk(clk), .hresetn(rstn), .hsel(hsel), .htrans(htrans), .hready(hready),
                         .hreadyout(hready), .hresp(hresp), .hrdata(hrdata));

  `include "tb_common.svh"

  initial begin
    repeat (2000) @(posedge clk);
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
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      check(hready && !hresp, "not idle-OKAY before transfer");
      ahb_xfer(n, 32'h9000_0000 + n, n, n % 2, err, rd, cyc);
      check(err && cyc == 2 && rd == 0, $sformatf("transfer %0d: err %0d cyc %0d", n, err, cyc));
      // IDLE transfer with hsel high: no error
      @(negedge clk); hsel = 1; htrans = 2'b00;
      @(negedge clk); hsel = 0;
      check(hready && !hresp, "IDLE transfer answered with ERROR");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
