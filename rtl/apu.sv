// apu -- Address Protection Unit of a TRANSMON.
//
// Checks one AHB-Lite address phase against the N_APU policies of the APU
// policy register space and says whether any of them allows it.  A policy
// allows the transfer when all three checkers agree:
//   master ID checker     HMASTER == APUMID
//   address range checker ((HADDR ^ APUADDR) & ~APUMASK) == 0, i.e. HADDR lies
//                         in APUADDR & ~APUMASK .. APUADDR | APUMASK with the
//                         unmasked bits equal (bit-wise, no magnitude compare)
//   access right checker  APUPERM bit 0 for reads, bit 1 for writes.
// A transfer that no policy allows is denied (deny by default).
//
// Purely combinational, so the decision is ready inside the address phase and
// costs no cycle.  The three checkers and the masked-range formula follow the
// paper; the encoding of APUPERM (bit 0 read, bit 1 write, so 0x3 is
// read-write) is this design's choice.
module apu
  import isea_pkg::*;
#(
  parameter int N_APU = N_APU_DEF
) (
  input  apu_policy_t [N_APU-1:0] policies,
  input  logic [31:0]             hmaster,
  input  logic [31:0]             haddr,
  input  logic                    hwrite,
  output logic [N_APU-1:0]        hits,    // policy i allows this transfer
  output logic                    allow
);

  always_comb begin
    for (int i = 0; i < N_APU; i++) begin
      hits[i] = (policies[i].mid == hmaster)
              && masked_match(haddr, policies[i].addr, policies[i].mask)
              && (hwrite ? policies[i].perm[PERM_W] : policies[i].perm[PERM_R]);
    end
    allow = |hits;
  end

endmodule
