// dpu -- Data Protection Unit of a TRANSMON.
//
// Blocks writes of restricted data values.  The check is split over the two
// AHB-Lite phases because the data is only on the bus in the data phase:
//   address phase: hit[j] = this is a write, HMASTER == DPUMID and
//                  ((HADDR ^ DPUADDR) & ~DPUAMASK) == 0      (master ID and
//                  address range checkers).  The SAF registers hit[] and
//                  holds the transfer one cycle when any bit is set.
//   data phase:    block = some registered hit_q[j] with
//                  ((HWDATA ^ DPUDATA) & ~DPUDMASK) == 0     (write data
//                  value checker), i.e. the bits not masked equal DPUDATA.
// Example: DPUDATA = 0, DPUDMASK = 0xFFFF_FFFE blocks any write that clears
// bit 0 of the covered register.
//
// Purely combinational; policies are read from the DPU policy register space.
// The checkers and the masked formulas follow the paper.
module dpu
  import isea_pkg::*;
#(
  parameter int N_DPU = N_DPU_DEF
) (
  input  dpu_policy_t [N_DPU-1:0] policies,
  // address phase
  input  logic [31:0]             hmaster,
  input  logic [31:0]             haddr,
  input  logic                    hwrite,
  output logic [N_DPU-1:0]        hit,
  // data phase
  input  logic [N_DPU-1:0]        hit_q,
  input  logic [31:0]             hwdata,
  output logic                    block
);

  always_comb begin
    block = 1'b0;
    for (int j = 0; j < N_DPU; j++) begin
      hit[j] = hwrite
               && (policies[j].mid == hmaster)
               && masked_match(haddr, policies[j].addr, policies[j].amask);
      if (hit_q[j] && masked_match(hwdata, policies[j].data, policies[j].dmask))
        block = 1'b1;
    end
  end

endmodule
