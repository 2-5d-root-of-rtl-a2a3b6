// isea_top -- the ISEA 2.5D system: trusted active interposer plus the
// untrusted shared-memory chiplets.
//
// The interposer (isea_interposer) carries the AHB-Lite fabric, the bus
// interfaces, the TRANSMONs with their policy register spaces, the shared
// register space and the Secure Interface.  N_MEM shared-memory chiplets of
// 1 MB each (shared_mem_chiplet, 16 x 64 kB SRAM) sit behind their TRANSMONs.
// The untrusted processor chiplets (N_CORES Cortex-M0 cores, 16 per chiplet),
// the trusted PROC-0 and the external Trusted Configuration Unit are not part
// of this RTL: their AHB-Lite master ports, the blocked-request interrupts
// to PROC-0 and the TCU command port are the ports of this module.
//
// Address map: memory m at 0x2000_0000 + m*0x10_0000, SRS at 0x4002_0000,
// PRS k at 0x5000_0000 + k*0x4000 (k = N_MEM: the SRS's).  After reset all
// policies are clear, so every core and PROC-0 access to memory or SRS is
// answered with ERROR until policies are loaded by PROC-0 or the TCU.
// Everything runs on the one bus clock hclk with active-low reset hresetn.
module isea_top
  import isea_pkg::*;
#(
  parameter int N_CORES = N_CORES_DEF,
  parameter int N_MEM   = N_MEM_DEF,
  parameter int N_APU   = N_APU_DEF,
  parameter int N_DPU   = N_DPU_DEF
) (
  input  logic                    hclk,
  input  logic                    hresetn,
  input  ahb_m2s_t  [N_CORES-1:0] core_m2s,
  output ahb_s2m_t  [N_CORES-1:0] core_s2m,
  input  ahb_m2s_t                proc0_m2s,
  output ahb_s2m_t                proc0_s2m,
  output logic      [N_MEM:0]     proc0_irq,
  input  logic                    tcu_valid,
  output logic                    tcu_ready,
  input  logic                    tcu_write,
  input  logic      [31:0]        tcu_addr,
  input  logic      [31:0]        tcu_wdata,
  output logic                    tcu_rvalid,
  output logic      [31:0]        tcu_rdata,
  output logic                    tcu_err,
  output logic      [63:0][31:0]  srs_regs
);

  logic      [N_MEM-1:0]       mem_hsel, mem_hready, mem_hreadyout, mem_hresp;
  ahb_addr_t [N_MEM-1:0]       mem_addr;
  logic      [N_MEM-1:0][31:0] mem_hwdata, mem_hrdata;

  isea_interposer #(
    .N_CORES(N_CORES), .N_MEM(N_MEM), .N_APU(N_APU), .N_DPU(N_DPU), .N_SRS(64)
  ) u_interposer (
    .hclk(hclk), .hresetn(hresetn),
    .core_m2s(core_m2s), .core_s2m(core_s2m),
    .proc0_m2s(proc0_m2s), .proc0_s2m(proc0_s2m), .proc0_irq(proc0_irq),
    .tcu_valid(tcu_valid), .tcu_ready(tcu_ready), .tcu_write(tcu_write),
    .tcu_addr(tcu_addr), .tcu_wdata(tcu_wdata), .tcu_rvalid(tcu_rvalid),
    .tcu_rdata(tcu_rdata), .tcu_err(tcu_err),
    .mem_hsel(mem_hsel), .mem_addr(mem_addr), .mem_hwdata(mem_hwdata),
    .mem_hready(mem_hready), .mem_hreadyout(mem_hreadyout), .mem_hresp(mem_hresp),
    .mem_hrdata(mem_hrdata), .srs_regs(srs_regs)
  );

  for (genvar m = 0; m < N_MEM; m++) begin : g_mem
    shared_mem_chiplet #(.N_BANKS(16), .BANK_WORDS(16384)) u_mem (
      .hclk(hclk), .hresetn(hresetn),
      .hsel(mem_hsel[m]), .haddr(mem_addr[m].haddr), .htrans(mem_addr[m].htrans),
      .hwrite(mem_addr[m].hwrite), .hsize(mem_addr[m].hsize), .hwdata(mem_hwdata[m]),
      .hready(mem_hready[m]), .hreadyout(mem_hreadyout[m]), .hresp(mem_hresp[m]),
      .hrdata(mem_hrdata[m])
    );
  end

endmodule
