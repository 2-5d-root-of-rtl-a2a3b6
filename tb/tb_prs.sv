// tb_prs -- self-checking testbench of the Policy Register Space.
// Writes every field of every APU and DPU policy from the privileged
// masters (PROC-0, ID 0, and the Secure Interface, ID 65), reads them back
// over the bus and checks the policy outputs.  Checks that other masters
// and offsets holding no register get a two-cycle ERROR and change nothing,
// that reset clears all policies, and that OKAY transfers take one cycle.
module tb_prs;
  import isea_pkg::*;
  localparam int NA = 16, ND = 16;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic        hsel, hwrite, hready, hresp;
  logic [31:0] haddr, hmaster, hwdata, hrdata;
  logic [1:0]  htrans;
  logic [2:0]  hsize;
  apu_policy_t [NA-1:0] apu_pol;
  dpu_policy_t [ND-1:0] dpu_pol;

  prs #(.N_APU(NA), .N_DPU(ND), .PRIV0(0), .PRIV1(65)) dut (
    .hclk(clk), .hresetn(rstn), .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite),
    .hmaster(hmaster), .hwdata(hwdata), .hready(hready), .hreadyout(hready), .hresp(hresp),
    .hrdata(hrdata), .apu_pol(apu_pol), .dpu_pol(dpu_pol)
  );

  `include "tb_common.svh"

  function automatic logic [31:0] val(int kind, int i, int f);
    return {kind[3:0], 4'h0, i[7:0], 8'h5A, f[7:0]} ^ 32'h1357_9BDF;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
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
    check(apu_pol == '0 && dpu_pol == '0, "policies not cleared by reset");
    // load everything, alternating the two privileged masters
    for (int i = 0; i < NA; i++)
      for (int f = 0; f < 4; f++) begin
        ahb_xfer((i % 2) ? 65 : 0, 32'h5000_0000 + 16 * i + 4 * f, val(1, i, f), 1, err, rd, cyc);
        check(!err && cyc == 1, $sformatf("APU %0d.%0d write err %0d cyc %0d", i, f, err, cyc));
      end
    for (int j = 0; j < ND; j++)
      for (int f = 0; f < 5; f++) begin
        ahb_xfer(0, 32'h5000_2000 + 32 * j + 4 * f, val(2, j, f), 1, err, rd, cyc);
        check(!err && cyc == 1, $sformatf("DPU %0d.%0d write", j, f));
      end
    @(negedge clk);
    for (int i = 0; i < NA; i++)
      check(apu_pol[i].mid == val(1, i, 0) && apu_pol[i].addr == val(1, i, 1) &&
            apu_pol[i].mask == val(1, i, 2) && apu_pol[i].perm == val(1, i, 3),
            $sformatf("APU policy %0d output", i));
    for (int j = 0; j < ND; j++)
      check(dpu_pol[j].mid == val(2, j, 0) && dpu_pol[j].addr == val(2, j, 1) &&
            dpu_pol[j].data == val(2, j, 2) && dpu_pol[j].amask == val(2, j, 3) &&
            dpu_pol[j].dmask == val(2, j, 4), $sformatf("DPU policy %0d output", j));
    // read back
    for (int i = 0; i < NA; i++)
      for (int f = 0; f < 4; f++) begin
        ahb_xfer(65, 32'h5000_0000 + 16 * i + 4 * f, 0, 0, err, rd, cyc);
        check(!err && rd == val(1, i, f), $sformatf("APU %0d.%0d read %h", i, f, rd));
      end
    for (int j = 0; j < ND; j++)
      for (int f = 0; f < 5; f++) begin
        ahb_xfer(0, 32'h5000_2000 + 32 * j + 4 * f, 0, 0, err, rd, cyc);
        check(!err && rd == val(2, j, f), $sformatf("DPU %0d.%0d read %h", j, f, rd));
      end
    // unprivileged masters
    for (int m = 1; m <= 64; m += 9) begin
      ahb_xfer(m, 32'h5000_0000, 32'hFFFF_FFFF, 1, err, rd, cyc);
      check(err && cyc == 2, $sformatf("core %0d write to PRS: err %0d cyc %0d", m, err, cyc));
      ahb_xfer(m, 32'h5000_2004, 0, 0, err, rd, cyc);
      check(err && rd == 0, $sformatf("core %0d read of PRS", m));
    end
    @(negedge clk);
    check(apu_pol[0].mid == val(1, 0, 0), "unprivileged write changed a policy");
    // holes in the map
    ahb_xfer(0, 32'h5000_0000 + 16 * NA, 1, 1, err, rd, cyc);
    check(err, "write past last APU policy accepted");
    ahb_xfer(0, 32'h5000_2014, 1, 1, err, rd, cyc);
    check(err, "write to DPU field 5 accepted");
    // reset clears
    rstn = 0; @(posedge clk); rstn = 1;
    @(negedge clk);
    check(apu_pol == '0 && dpu_pol == '0, "policies not cleared by second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
