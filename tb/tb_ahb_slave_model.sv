// tb_ahb_slave_model -- behavioural AHB-Lite slave for the fabric tests:
// 256 words addressed by haddr[9:2], WAIT wait states per transfer, OKAY
// responses.  It counts the transfers it accepts and those whose master ID
// differs from the ID the testbench encodes in address bits [9:6].
module tb_ahb_slave_model #(
  parameter int WAIT = 1
) (
  input  logic        clk,
  input  logic        hsel,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hmaster,
  input  logic [31:0] hwdata,
  input  logic        hready,
  output logic        hreadyout,
  output logic        hresp,
  output logic [31:0] hrdata,
  output int          n_xfer,
  output int          n_bad_id
);
  logic [31:0] mem [256];
  logic        act = 1'b0, w_q;
  logic [7:0]  a_q;
  int          wcnt;
  initial begin
    n_xfer = 0; n_bad_id = 0; wcnt = 0;
    for (int i = 0; i < 256; i++) mem[i] = 32'h0;
  end
  always @(posedge clk) begin
    if (act && wcnt > 0) begin
      wcnt <= wcnt - 1;
    end else begin
      if (act && w_q) mem[a_q] <= hwdata;
      act <= 1'b0;
      if (hsel && htrans[1] && hready) begin
        act  <= 1'b1;
        a_q  <= haddr[9:2];
        w_q  <= hwrite;
        wcnt <= WAIT;
        n_xfer <= n_xfer + 1;
        if (hmaster != 32'(haddr[9:6])) n_bad_id <= n_bad_id + 1;
      end
    end
  end
  assign hreadyout = !(act && wcnt > 0);
  assign hresp     = 1'b0;
  assign hrdata    = (act && !w_q && wcnt == 0) ? mem[a_q] : 32'h0;
endmodule
