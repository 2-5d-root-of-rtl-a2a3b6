// tb_ahb_decoder -- self-checking testbench of the address decoder.
// Probes the first and last byte of every region of the address map, the
// bytes just outside, and random addresses, against a reference decode.
module tb_ahb_decoder;
  import isea_pkg::*;
  localparam int NM = 4, NS = 2 * NM + 2;
  logic [31:0] haddr; logic [NS-1:0] hsel; logic hsel_def;

  ahb_decoder #(.N_MEM(NM), .N_SLV(NS)) dut (.haddr(haddr), .hsel(hsel), .hsel_def(hsel_def));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int ref_slave(logic [31:0] a);
    if (a >= 32'h2000_0000 && a <= 32'h203F_FFFF) return int'((a - 32'h2000_0000) >> 20);
    if (a >= 32'h4002_0000 && a <= 32'h4002_0FFF) return NM;
    if (a >= 32'h5000_0000 && a <= 32'h5001_3FFF) return NM + 1 + int'((a - 32'h5000_0000) >> 14);
    return -1;
  endfunction

  task automatic probe(input logic [31:0] a);
    int s;
    haddr = a; #1;
    s = ref_slave(a);
    if (s < 0) check(hsel == '0 && hsel_def, $sformatf("%h: hsel %b def %0d expected default", a, hsel, hsel_def));
    else check(hsel == (NS'(1) << s) && !hsel_def, $sformatf("%h: hsel %b expected slave %0d", a, hsel, s));
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] edges [$];
    edges = '{32'h1FFF_FFFF, 32'h2000_0000, 32'h200F_FFFF, 32'h2010_0000, 32'h202F_FFFF,
              32'h2030_0000, 32'h203F_FFFF, 32'h2040_0000, 32'h4001_FFFF, 32'h4002_0000,
              32'h4002_009C, 32'h4002_0FFF, 32'h4002_1000, 32'h4FFF_FFFF, 32'h5000_0000,
              32'h5000_3FFF, 32'h5000_4000, 32'h5000_C000, 32'h5001_0000, 32'h5001_3FFF,
              32'h5001_4000, 32'h0000_0000, 32'hFFFF_FFFF};
    foreach (edges[k]) probe(edges[k]);
    for (int n = 0; n < 3000; n++) begin
      case (n % 4)
        0: probe($urandom);
        1: probe(32'h2000_0000 + ($urandom & 32'h007F_FFFF));
        2: probe(32'h4002_0000 + ($urandom & 32'h0000_1FFF));
        default: probe(32'h5000_0000 + ($urandom & 32'h0003_FFFF));
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
