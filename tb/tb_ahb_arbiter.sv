// tb_ahb_arbiter -- self-checking testbench of the round-robin arbiter.
// Random request patterns and HREADY: checks that the grant is one-hot,
// goes only to a requester, follows round-robin order from the last winner,
// that dgrant is the previous grant registered only when HREADY is high, and
// that with all 66 masters requesting each is served exactly once in 66
// transfers.
module tb_ahb_arbiter;
  localparam int N = 66;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0] req, grant, dgrant;
  logic hready;

  ahb_arbiter #(.N(N)) dut (.hclk(clk), .hresetn(rstn), .req(req), .hready(hready),
                            .grant(grant), .dgrant(dgrant));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int last = N - 1;
  logic [N-1:0] exp_d = '0;

  function automatic int ref_win(logic [N-1:0] r, int l);
    for (int k = 1; k <= N; k++) if (r[(l + k) % N]) return (l + k) % N;
    return -1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int served [N];
    req = '0; hready = 1;
    repeat (2) @(posedge clk);
    rstn = 1;
    for (int n = 0; n < 5000; n++) begin
      int w;
      @(negedge clk);
      check(dgrant == exp_d, $sformatf("cycle %0d: dgrant wrong", n));
      for (int i = 0; i < N; i++) req[i] = ($urandom_range(0, 7) == 0);
      hready = ($urandom_range(0, 3) != 0);
      #1;
      w = ref_win(req, last);
      if (w < 0) check(grant == '0, "grant without request");
      else check(grant == (N'(1) << w), $sformatf("cycle %0d: grant to wrong master, expected %0d", n, w));
      if (hready) begin
        exp_d = grant;
        if (w >= 0) last = w;
      end
    end
    // fairness with everyone requesting
    @(negedge clk);
    foreach (served[i]) served[i] = 0;
    req = '1; hready = 1;
    for (int n = 0; n < N; n++) begin
      #1;
      for (int i = 0; i < N; i++) if (grant[i]) served[i]++;
      @(negedge clk);
    end
    foreach (served[i]) check(served[i] == 1, $sformatf("master %0d served %0d times", i, served[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
