// tb_sram_64kb -- self-checking testbench of the 64 kB SRAM macro model.
// Random byte-masked writes and reads over the whole 16K-word array against
// a reference array; checks the one-cycle read latency and that rdata holds
// while the macro is not read.
module tb_sram_64kb;
  localparam int W = 16384;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic ce; logic [3:0] we; logic [13:0] addr; logic [31:0] wdata, rdata;

  sram_64kb #(.WORDS(W)) dut (.clk(clk), .ce(ce), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ref_m [W];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ce = 0; we = 0; addr = 0; wdata = 0;
    // fill every word once
    for (int i = 0; i < W; i++) begin
      @(negedge clk); ce = 1; we = 4'hF; addr = 14'(i); wdata = i * 32'h9E37_79B9; ref_m[i] = wdata;
    end
    for (int n = 0; n < 20000; n++) begin
      int i;
      i = $urandom_range(0, W - 1);
      @(negedge clk);
      ce = 1; addr = 14'(i);
      if ($urandom_range(0, 1)) begin
        we = 4'($urandom_range(1, 15)); wdata = $urandom;
        for (int b = 0; b < 4; b++) if (we[b]) ref_m[i][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        we = 0;
        @(negedge clk);
        ce = 0;
        check(rdata == ref_m[i], $sformatf("word %0d read %h expected %h", i, rdata, ref_m[i]));
        @(negedge clk);
        check(rdata == ref_m[i], "rdata not held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
