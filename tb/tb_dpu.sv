// tb_dpu -- self-checking testbench of the Data Protection Unit.
// Checks the address-phase coverage (write, DPUMID, masked address) and the
// data-phase verdict (masked data equals DPUDATA) for the published key
// policy (0x0BAD_BEEF anywhere in 0x2000_0000..0x2FFF_FFFF for core 2) and
// semaphore policy (no clearing of bit 0 of 0x4002_009C by core 2), then
// against a bit-by-bit reference for random policies and transfers.
module tb_dpu;
  import isea_pkg::*;
  localparam int ND = 16;

  dpu_policy_t [ND-1:0] pol;
  logic [31:0] hmaster, haddr, hwdata;
  logic        hwrite, block;
  logic [ND-1:0] hit, hit_q;

  dpu #(.N_DPU(ND)) dut (.policies(pol), .hmaster(hmaster), .haddr(haddr), .hwrite(hwrite),
                         .hit(hit), .hit_q(hit_q), .hwdata(hwdata), .block(block));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit eq_unmasked(logic [31:0] v, logic [31:0] r, logic [31:0] m);
    for (int b = 0; b < 32; b++) if (!m[b] && v[b] != r[b]) return 1'b0;
    return 1'b1;
  endfunction

  // Address phase then data phase, as the SAF does it.
  task automatic probe(input logic [31:0] mid, input logic [31:0] a, input bit wr,
                       input logic [31:0] d);
    logic [ND-1:0] exp_hit; bit exp_block;
    exp_block = 1'b0;
    for (int j = 0; j < ND; j++) begin
      exp_hit[j] = wr && pol[j].mid == mid && eq_unmasked(a, pol[j].addr, pol[j].amask);
      if (exp_hit[j] && eq_unmasked(d, pol[j].data, pol[j].dmask)) exp_block = 1'b1;
    end
    hmaster = mid; haddr = a; hwrite = wr; hit_q = '0; hwdata = 32'h1234_5678;
    #1;
    check(hit == exp_hit, $sformatf("hit %h expected %h (mid %0d addr %h)", hit, exp_hit, mid, a));
    hit_q = hit; hmaster = 32'hFFFF_FFFF; haddr = 32'h0; hwdata = d;
    #1;
    check(block == exp_block, $sformatf("block %0d expected %0d (mid %0d addr %h data %h)",
                                        block, exp_block, mid, a, d));
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    pol = '0;
    for (int j = 0; j < ND; j++) pol[j].mid = 32'hFFFF_0000;   // unused entries
    pol[1] = '{mid: 2, addr: 32'h2000_FFFC, data: 32'h0BAD_BEEF, amask: 32'h0FFF_FFFF, dmask: 0};
    pol[2] = '{mid: 2, addr: 32'h4002_009C, data: 0, amask: 0, dmask: 32'hFFFF_FFFE};
    probe(2, 32'h2001_FFE8, 1'b1, 32'h0BAD_BEEF);
    check(block == 1'b1, "key write not blocked");
    probe(2, 32'h2001_FFE8, 1'b1, 32'h00EF_BE00);
    check(block == 1'b0, "other data blocked");
    probe(2, 32'h2001_FFE8, 1'b0, 32'h0BAD_BEEF);
    check(hit == '0, "read covered");
    probe(1, 32'h2000_003C, 1'b1, 32'h0BAD_BEEF);
    check(block == 1'b0, "other core blocked");
    probe(2, 32'h4002_009C, 1'b1, 32'h0000_0000);
    check(block == 1'b1, "semaphore clear not blocked");
    probe(2, 32'h4002_009C, 1'b1, 32'h0000_0003);
    check(block == 1'b0, "semaphore set blocked");
    probe(2, 32'h4002_00A0, 1'b1, 32'h0000_0000);
    check(block == 1'b0, "neighbour register blocked");
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] mid, a, d;
      if (n % 500 == 0)
        for (int j = 3; j < ND; j++)
          pol[j] = '{mid: $urandom_range(0, 3), addr: $urandom, data: $urandom,
                     amask: $urandom | $urandom, dmask: $urandom | $urandom};
      mid = $urandom_range(0, 3);
      a   = pol[$urandom_range(0, ND - 1)].addr ^ ($urandom & $urandom & $urandom);
      d   = pol[$urandom_range(0, ND - 1)].data ^ ($urandom & $urandom & $urandom);
      probe(mid, a, $urandom_range(0, 3) != 0, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
