// sram_64kb -- one 64 kB single-port SRAM macro of a shared-memory chiplet.
//
// WORDS x 32 bits (16K words = 64 kB by default), byte write enables,
// synchronous read: the word addressed at a rising edge with ce=1 and no
// write enable appears on rdata after that edge and holds until the next
// read.  Written as an array so that any SRAM compiler's macro of the same
// ports can replace it.  The 64 kB size follows the paper's memory chiplets
// (1 MB each, built from sixteen 64 kB memories); word width, byte enables
// and read timing are this design's choices.
module sram_64kb #(
  parameter int WORDS = 16384,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          ce,
  input  logic [3:0]    we,      // byte write enables
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (ce) begin
      for (int b = 0; b < 4; b++)
        if (we[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      if (we == 4'b0) rdata <= mem[addr];
    end
  end

endmodule
