// transmon -- Transaction Monitor placed in front of one shared slave.
//
// Every transfer addressed to the slave passes through here.  The APU checks
// master ID, address range and access right in the address phase; the DPU
// flags writes covered by a data policy, and the Slave Access Filter (SAF)
// forwards, holds for the data check, or drops the transfer.  A response MUX
// returns either the slave's own response or the TRANSMON's ERROR, and a
// dropped transfer raises a one-cycle interrupt toward PROC-0.
//
// Interface: an AHB-Lite slave port toward the bus (hmaster carries the ID
// stamped by the master's bus interface), an AHB-Lite master-like port toward
// the memory controller (*_s, with hmaster_s), the APU and DPU policies from
// the PRS, and irq.
//
// Timing: no added cycle for transfers without a DPU policy, one added cycle
// for DPU-covered writes; see saf.sv.  The composition APU + DPU + SAF +
// response MUX follows the paper's TRANSMON block diagram; the optional
// memory-security feature is not included, as in the paper's own prototype.
module transmon
  import isea_pkg::*;
#(
  parameter int N_APU = N_APU_DEF,
  parameter int N_DPU = N_DPU_DEF
) (
  input  logic                    hclk,
  input  logic                    hresetn,
  // policies from the PRS
  input  apu_policy_t [N_APU-1:0] apu_pol,
  input  dpu_policy_t [N_DPU-1:0] dpu_pol,
  // AHB-Lite to TRANSMON
  input  logic                    hsel,
  input  logic [31:0]             haddr,
  input  logic [1:0]              htrans,
  input  logic                    hwrite,
  input  logic [2:0]              hsize,
  input  logic [31:0]             hmaster,
  input  logic [31:0]             hwdata,
  input  logic                    hready,
  output logic                    hreadyout,
  output logic                    hresp,
  output logic [31:0]             hrdata,
  // TRANSMON to memory controller
  output logic                    hsel_s,
  output logic [31:0]             haddr_s,
  output logic [1:0]              htrans_s,
  output logic                    hwrite_s,
  output logic [2:0]              hsize_s,
  output logic [31:0]             hmaster_s,
  output logic [31:0]             hwdata_s,
  output logic                    hready_s,
  input  logic                    hreadyout_s,
  input  logic                    hresp_s,
  input  logic [31:0]             hrdata_s,
  // blocked-request interrupt to PROC-0
  output logic                    irq
);

  logic             apu_allow;
  logic [N_APU-1:0] apu_hits;
  logic [N_DPU-1:0] dpu_cover, dpu_cover_q;
  logic             dpu_block;
  logic             use_slave, own_ready, own_resp;

  apu #(.N_APU(N_APU)) u_apu (
    .policies(apu_pol), .hmaster(hmaster), .haddr(haddr), .hwrite(hwrite),
    .hits(apu_hits), .allow(apu_allow)
  );

  dpu #(.N_DPU(N_DPU)) u_dpu (
    .policies(dpu_pol), .hmaster(hmaster), .haddr(haddr), .hwrite(hwrite),
    .hit(dpu_cover), .hit_q(dpu_cover_q), .hwdata(hwdata), .block(dpu_block)
  );

  saf #(.N_DPU(N_DPU)) u_saf (
    .hclk(hclk), .hresetn(hresetn),
    .hsel(hsel), .haddr(haddr), .htrans(htrans), .hwrite(hwrite), .hsize(hsize),
    .hmaster(hmaster), .hwdata(hwdata), .hready(hready),
    .apu_allow(apu_allow), .dpu_cover(dpu_cover), .dpu_cover_q(dpu_cover_q),
    .dpu_block(dpu_block),
    .hsel_s(hsel_s), .haddr_s(haddr_s), .htrans_s(htrans_s), .hwrite_s(hwrite_s),
    .hsize_s(hsize_s), .hmaster_s(hmaster_s), .hwdata_s(hwdata_s), .hready_s(hready_s),
    .use_slave(use_slave), .own_ready(own_ready), .own_resp(own_resp), .irq(irq)
  );

  // Response MUX: slave response for forwarded transfers, else the SAF's own.
  always_comb begin
    if (use_slave) begin
      hreadyout = hreadyout_s;
      hresp     = hresp_s;
      hrdata    = hrdata_s;
    end else begin
      hreadyout = own_ready;
      hresp     = own_resp;
      hrdata    = '0;
    end
  end

endmodule
