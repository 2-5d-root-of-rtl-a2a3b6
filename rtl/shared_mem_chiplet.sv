// shared_mem_chiplet -- untrusted shared-memory chiplet: AHB-Lite memory
// controller over N_BANKS SRAM macros (16 x 64 kB = 1 MB by default).
//
// The controller decodes the word address: bits [AW+1:2] pick the word in a
// macro, the bits above pick the macro.  Only the TRANSMON in front of the
// chiplet talks to it; the chiplet trusts whatever it is sent.
//
// Timing: one wait state for every transfer.  Address phase: the controller
// registers address, direction and byte lanes.  First data-phase cycle:
// HREADYOUT=0 and the macro is accessed (write data taken from HWDATA, or the
// read started).  Second cycle: HREADYOUT=1 and, for a read, HRDATA holds the
// macro's output.  HRESP is always OKAY.  hmaster_s from the TRANSMON is
// accepted but not needed by the memory.  Size and banking follow the paper's
// memory chiplets; the wait state and the address split are this design's.
module shared_mem_chiplet
  import isea_pkg::*;
#(
  parameter int N_BANKS    = 16,
  parameter int BANK_WORDS = 16384
) (
  input  logic        hclk,
  input  logic        hresetn,
  input  logic        hsel,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [2:0]  hsize,
  input  logic [31:0] hwdata,
  input  logic        hready,
  output logic        hreadyout,
  output logic        hresp,
  output logic [31:0] hrdata
);

  localparam int AW = $clog2(BANK_WORDS);
  localparam int BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;

  typedef enum logic [1:0] {M_IDLE, M_W1, M_W2} mstate_t;
  mstate_t      state;
  logic         aphase, write_q;
  logic [AW-1:0] row_q;
  logic [BW-1:0] bank_q;
  logic [3:0]   lanes_q;
  logic [31:0]  rdata [N_BANKS];

  assign aphase = hsel && htrans[1] && hready;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state   <= M_IDLE;
      write_q <= 1'b0;
      row_q   <= '0;
      bank_q  <= '0;
      lanes_q <= '0;
    end else begin
      unique case (state)
        M_W1:    state <= M_W2;
        default: if (hready) begin
          if (aphase) begin
            state   <= M_W1;
            write_q <= hwrite;
            row_q   <= haddr[AW+1:2];
            bank_q  <= (N_BANKS > 1) ? BW'(haddr[AW+2 +: BW]) : '0;
            lanes_q <= byte_lanes(hsize, haddr[1:0]);
          end else begin
            state <= M_IDLE;
          end
        end
      endcase
    end
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic ce;
    assign ce = (state == M_W1) && (32'(bank_q) == b);
    sram_64kb #(.WORDS(BANK_WORDS)) u_sram (
      .clk  (hclk),
      .ce   (ce),
      .we   (write_q ? lanes_q : 4'b0000),
      .addr (row_q),
      .wdata(hwdata),
      .rdata(rdata[b])
    );
  end

  assign hreadyout = (state != M_W1);
  assign hresp     = 1'b0;
  assign hrdata    = (state == M_W2 && !write_q) ? rdata[bank_q] : '0;

endmodule
