// tb_apu -- self-checking testbench of the Address Protection Unit.
// Loads the published policy pair of core 2 (0x4002_006C/0x6C and
// 0x4002_0074/0xF8B, read-write) plus random policies, and compares the
// unit's allow output with a reference written as explicit range, ID and
// permission tests, for the published addresses and random transfers.
module tb_apu;
  import isea_pkg::*;
  localparam int NA = 16;

  logic clk = 1'b0;
  apu_policy_t [NA-1:0] pol;
  logic [31:0] hmaster, haddr;
  logic        hwrite, allow;
  logic [NA-1:0] hits;

  apu #(.N_APU(NA)) dut (.policies(pol), .hmaster(hmaster), .haddr(haddr), .hwrite(hwrite),
                         .hits(hits), .allow(allow));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference: bit-by-bit comparison of the unmasked address bits.
  function automatic bit ref_allow(logic [31:0] mid, logic [31:0] a, bit wr);
    for (int i = 0; i < NA; i++) begin
      bit same = 1'b1;
      for (int b = 0; b < 32; b++)
        if (!pol[i].mask[b] && (a[b] != pol[i].addr[b])) same = 1'b0;
      if (same && pol[i].mid == mid && pol[i].perm[wr ? 1 : 0]) return 1'b1;
    end
    return 1'b0;
  endfunction

  task automatic probe(input logic [31:0] mid, input logic [31:0] a, input bit wr, input bit exp);
    hmaster = mid; haddr = a; hwrite = wr;
    #1;
    check(allow == exp, $sformatf("mid %0d addr %h wr %0d: allow %0d expected %0d", mid, a, wr, allow, exp));
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    pol = '0;
    probe(0, 32'h0, 1'b0, 1'b0);            // cleared PRS denies everything
    pol[0] = '{mid: 2, addr: 32'h4002_006C, mask: 32'h0000_006C, perm: 3};
    pol[1] = '{mid: 2, addr: 32'h4002_0074, mask: 32'h0000_0F8B, perm: 3};
    probe(2, 32'h4002_0070, 1'b1, 1'b0);    // the protected word
    probe(2, 32'h4002_0070, 1'b0, 1'b0);
    probe(2, 32'h4002_0000, 1'b1, 1'b1);    // start of range 1
    probe(2, 32'h4002_006C, 1'b1, 1'b1);    // end of range 1
    probe(2, 32'h4002_0074, 1'b1, 1'b1);    // start of range 2
    probe(2, 32'h4002_0FFF, 1'b0, 1'b1);    // end of range 2
    probe(2, 32'h4002_1000, 1'b0, 1'b0);
    probe(1, 32'h4002_0074, 1'b0, 1'b0);    // wrong master
    pol[2] = '{mid: 5, addr: 32'h2000_0000, mask: 32'h000F_FFFF, perm: 1};
    probe(5, 32'h2004_0000, 1'b0, 1'b1);    // read-only
    probe(5, 32'h2004_0000, 1'b1, 1'b0);
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] mid, a; bit wr;
      if (n % 500 == 0)
        for (int i = 3; i < NA; i++)
          pol[i] = '{mid: $urandom_range(0, 7), addr: $urandom, mask: $urandom & $urandom,
                     perm: $urandom_range(0, 3)};
      mid = $urandom_range(0, 7);
      wr  = $urandom_range(0, 1) == 1;
      a   = (n % 2) ? pol[$urandom_range(0, NA - 1)].addr ^ ($urandom & 32'h0000_0FFF) : $urandom;
      probe(mid, a, wr, ref_allow(mid, a, wr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
