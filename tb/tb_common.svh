// tb_common.svh -- check counter and AHB-Lite slave-port driver shared by
// the block testbenches.  The including module declares clk and the slave
// port signals hsel, haddr, htrans, hwrite, hsize, hmaster, hwdata (driven)
// and hready, hresp, hrdata (observed; hready is the bus HREADY).
// ahb_xfer performs one transfer: address phase, then the data phase until
// HREADY is high, and returns the response, read data and the number of
// data-phase cycles.

int checks = 0, failures = 0;

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    $display("FAIL: %s", what);
  end
endtask

task automatic ahb_xfer(input logic [31:0] mid, input logic [31:0] a, input logic [31:0] d,
                        input bit wr, output bit err, output logic [31:0] rd, output int cyc,
                        input logic [2:0] size = 3'b010);
  @(negedge clk);
  hsel = 1'b1; htrans = 2'b10; haddr = a; hwrite = wr; hmaster = mid; hsize = size;
  @(posedge clk);
  @(negedge clk);
  hsel = 1'b0; htrans = 2'b00; haddr = 32'h0; hwrite = 1'b0; hmaster = 32'h0;
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
