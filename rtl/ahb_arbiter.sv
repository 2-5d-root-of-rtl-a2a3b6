// ahb_arbiter -- round-robin arbiter of the shared AHB-Lite address phase.
//
// Each cycle it grants the address phase to one requesting bus interface,
// searching from the one after the last winner, so every master is served
// within N transfers.  The grant counts only when the bus HREADY is high;
// then the winner becomes the data-phase owner (dgrant) for the next
// transfer, which selects its write data and lets its BI pass the response.
// grant is combinational from req; dgrant is registered.  The paper names
// arbiters as part of the AHB-Lite fabric; the round-robin policy is this
// design's choice.
module ahb_arbiter #(
  parameter int N = 66
) (
  input  logic         hclk,
  input  logic         hresetn,
  input  logic [N-1:0] req,
  input  logic         hready,
  output logic [N-1:0] grant,
  output logic [N-1:0] dgrant
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    grant = '0;
    win   = last;
    any   = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (32'(last) + k) % N;
      if (!any && req[c]) begin
        any = 1'b1;
        win = IW'(c);
      end
    end
    if (any) grant[win] = 1'b1;
  end

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      last   <= IW'(N - 1);
      dgrant <= '0;
    end else if (hready) begin
      dgrant <= grant;
      if (any) last <= win;
    end
  end

  a_onehot: assert property (@(posedge hclk) disable iff (!hresetn) $onehot0(grant));

endmodule
