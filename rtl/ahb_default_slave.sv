// ahb_default_slave -- answers every transfer to an unmapped address.
//
// A transfer that selects it gets the two-cycle AHB ERROR response (HRESP=1
// with HREADYOUT=0, then HRESP=1 with HREADYOUT=1); IDLE and BUSY transfers
// get a zero-wait OKAY.  Read data is always zero.  This is the standard
// AHB-Lite companion of a decoder with holes in its map; it also makes
// unmapped addresses answer the same generic error as a denied access.
module ahb_default_slave (
  input  logic        hclk,
  input  logic        hresetn,
  input  logic        hsel,
  input  logic [1:0]  htrans,
  input  logic        hready,
  output logic        hreadyout,
  output logic        hresp,
  output logic [31:0] hrdata
);

  typedef enum logic [1:0] {D_IDLE, D_ERR1, D_ERR2} dstate_t;
  dstate_t state;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state <= D_IDLE;
    end else if (state == D_ERR1) begin
      state <= D_ERR2;
    end else if (hready) begin
      state <= (hsel && htrans[1]) ? D_ERR1 : D_IDLE;
    end
  end

  assign hreadyout = (state != D_ERR1);
  assign hresp     = (state != D_IDLE);
  assign hrdata    = '0;

endmodule
