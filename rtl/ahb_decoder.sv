// ahb_decoder -- address decoder of the shared AHB-Lite.
//
// Turns the address of the current address phase into a one-hot slave
// select.  Slave numbering:
//   0 .. N_MEM-1        shared-memory chiplet m (through its TRANSMON),
//                       MEM_BASE + m*MEM_SPAN, 1 MB each
//   N_MEM               shared register space (through its TRANSMON), SRS_BASE
//   N_MEM+1 .. 2*N_MEM+1 policy register space k, PRS_BASE + k*PRS_SPAN;
//                       PRS k belongs to TRANSMON k (k = N_MEM: the SRS's)
//   hsel_def            no slave: the default slave answers with ERROR.
// Combinational.  The paper names decoders as part of the AHB-Lite; the
// address map is this design's (see isea_pkg).
module ahb_decoder
  import isea_pkg::*;
#(
  parameter int N_MEM = N_MEM_DEF,
  parameter int N_SLV = 2 * N_MEM + 2
) (
  input  logic [31:0]      haddr,
  output logic [N_SLV-1:0] hsel,
  output logic             hsel_def
);

  always_comb begin
    hsel = '0;
    for (int m = 0; m < N_MEM; m++)
      if (haddr >= MEM_BASE + 32'(m) * MEM_SPAN && haddr < MEM_BASE + 32'(m + 1) * MEM_SPAN)
        hsel[m] = 1'b1;
    if (haddr >= SRS_BASE && haddr < SRS_BASE + SRS_SPAN)
      hsel[N_MEM] = 1'b1;
    for (int k = 0; k <= N_MEM; k++)
      if (haddr >= PRS_BASE + 32'(k) * PRS_SPAN && haddr < PRS_BASE + 32'(k + 1) * PRS_SPAN)
        hsel[N_MEM + 1 + k] = 1'b1;
    hsel_def = (hsel == '0);
  end

endmodule
