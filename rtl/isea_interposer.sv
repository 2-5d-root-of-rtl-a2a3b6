// isea_interposer -- all logic of the trusted active interposer.
//
// Holds the system-level interconnect and every security feature, so that no
// untrusted chiplet can reach another except through it:
//   * one bus interface per master (PROC-0, the N_CORES untrusted cores, the
//     Secure Interface), each stamping its fixed master ID;
//   * the shared AHB-Lite (arbiter, decoder, multiplexers, default slave);
//   * one TRANSMON per shared-memory chiplet and one for the shared register
//     space, each with its own policy register space (PRS) on the bus;
//   * the shared register space (SRS) and the Secure Interface (SI).
// PROC-0 itself (a Cortex-M0) and the cores are outside this RTL; their
// AHB-Lite master ports are ports here.  The memory chiplets hang off the
// mem_* ports, each behind its TRANSMON.
//
// Master IDs: PROC-0 = 0, core k (k = 1..N_CORES) = k, SI = N_CORES+1.
// proc0_irq[k] pulses for one cycle whenever TRANSMON k drops a request
// (k = N_MEM is the SRS's TRANSMON).  All ports are synchronous to hclk.
// The set of blocks and their placement follow the paper's ISEA block
// diagram; IDs, address map and interrupt form are this design's choices.
module isea_interposer
  import isea_pkg::*;
#(
  parameter int N_CORES = N_CORES_DEF,
  parameter int N_MEM   = N_MEM_DEF,
  parameter int N_APU   = N_APU_DEF,
  parameter int N_DPU   = N_DPU_DEF,
  parameter int N_SRS   = 64
) (
  input  logic                        hclk,
  input  logic                        hresetn,
  // untrusted cores PROC-1 .. PROC-N (index k-1 is PROC-k)
  input  ahb_m2s_t  [N_CORES-1:0]     core_m2s,
  output ahb_s2m_t  [N_CORES-1:0]     core_s2m,
  // trusted PROC-0
  input  ahb_m2s_t                    proc0_m2s,
  output ahb_s2m_t                    proc0_s2m,
  output logic      [N_MEM:0]         proc0_irq,
  // Trusted Configuration Unit
  input  logic                        tcu_valid,
  output logic                        tcu_ready,
  input  logic                        tcu_write,
  input  logic      [31:0]            tcu_addr,
  input  logic      [31:0]            tcu_wdata,
  output logic                        tcu_rvalid,
  output logic      [31:0]            tcu_rdata,
  output logic                        tcu_err,
  // TRANSMON to memory controller, one per shared-memory chiplet
  output logic      [N_MEM-1:0]       mem_hsel,
  output ahb_addr_t [N_MEM-1:0]       mem_addr,
  output logic      [N_MEM-1:0][31:0] mem_hwdata,
  output logic      [N_MEM-1:0]       mem_hready,
  input  logic      [N_MEM-1:0]       mem_hreadyout,
  input  logic      [N_MEM-1:0]       mem_hresp,
  input  logic      [N_MEM-1:0][31:0] mem_hrdata,
  // shared register space contents, for PROC-0
  output logic      [N_SRS-1:0][31:0] srs_regs
);

  localparam int N_MST = N_CORES + 2;
  localparam int N_MON = N_MEM + 1;          // TRANSMONs: memories + SRS
  localparam int N_SLV = 2 * N_MEM + 2;      // TRANSMONs + PRSs
  localparam logic [31:0] MID_SI = mid_si(N_CORES);

  // ------------------------------------------------------------ masters
  ahb_m2s_t  [N_MST-1:0]       mst_m2s;
  ahb_s2m_t  [N_MST-1:0]       mst_s2m;
  logic      [N_MST-1:0]       b_req, b_grant, b_dgrant;
  ahb_addr_t [N_MST-1:0]       b_addr;
  logic      [N_MST-1:0][31:0] b_hwdata;
  ahb_s2m_t                    bus_rsp;
  ahb_m2s_t                    si_m2s;

  assign mst_m2s[0] = proc0_m2s;
  assign proc0_s2m  = mst_s2m[0];
  for (genvar k = 1; k <= N_CORES; k++) begin : g_core_io
    assign mst_m2s[k]    = core_m2s[k-1];
    assign core_s2m[k-1] = mst_s2m[k];
  end
  assign mst_m2s[N_MST-1] = si_m2s;

  for (genvar k = 0; k < N_MST; k++) begin : g_bi
    ahb_master_bi #(.MID(32'(k))) u_bi (
      .hclk(hclk), .hresetn(hresetn),
      .m_req(mst_m2s[k]), .m_rsp(mst_s2m[k]),
      .req(b_req[k]), .b_addr(b_addr[k]), .b_hwdata(b_hwdata[k]),
      .grant(b_grant[k]), .dgrant(b_dgrant[k]), .bus_rsp(bus_rsp)
    );
  end

  secure_if u_si (
    .hclk(hclk), .hresetn(hresetn),
    .tcu_valid(tcu_valid), .tcu_ready(tcu_ready), .tcu_write(tcu_write),
    .tcu_addr(tcu_addr), .tcu_wdata(tcu_wdata), .tcu_rvalid(tcu_rvalid),
    .tcu_rdata(tcu_rdata), .tcu_err(tcu_err),
    .m_req(si_m2s), .m_rsp(mst_s2m[N_MST-1])
  );

  // ------------------------------------------------------------ fabric
  logic      [N_SLV-1:0]       s_hsel, s_hreadyout, s_hresp;
  logic      [N_SLV-1:0][31:0] s_hrdata;
  ahb_addr_t                   s_addr;
  logic      [31:0]            s_hwdata;
  logic                        s_hready;

  ahb_interconnect #(.N_MST(N_MST), .N_MEM(N_MEM), .N_SLV(N_SLV)) u_bus (
    .hclk(hclk), .hresetn(hresetn),
    .m_req(b_req), .m_addr(b_addr), .m_hwdata(b_hwdata),
    .m_grant(b_grant), .m_dgrant(b_dgrant), .bus_rsp(bus_rsp),
    .s_hsel(s_hsel), .s_addr(s_addr), .s_hwdata(s_hwdata), .s_hready(s_hready),
    .s_hreadyout(s_hreadyout), .s_hresp(s_hresp), .s_hrdata(s_hrdata)
  );

  // ------------------------------------------------------------ PRSs
  apu_policy_t [N_MON-1:0][N_APU-1:0] apu_pol;
  dpu_policy_t [N_MON-1:0][N_DPU-1:0] dpu_pol;

  for (genvar k = 0; k < N_MON; k++) begin : g_prs
    prs #(.N_APU(N_APU), .N_DPU(N_DPU), .PRIV0(MID_PROC0), .PRIV1(MID_SI)) u_prs (
      .hclk(hclk), .hresetn(hresetn),
      .hsel(s_hsel[N_MON+k]), .haddr(s_addr.haddr), .htrans(s_addr.htrans),
      .hwrite(s_addr.hwrite), .hmaster(s_addr.hmaster), .hwdata(s_hwdata),
      .hready(s_hready), .hreadyout(s_hreadyout[N_MON+k]), .hresp(s_hresp[N_MON+k]),
      .hrdata(s_hrdata[N_MON+k]), .apu_pol(apu_pol[k]), .dpu_pol(dpu_pol[k])
    );
  end

  // ------------------------------------------------------------ TRANSMONs
  logic      [N_MON-1:0]       t_hsel, t_hwrite, t_hready, t_hreadyout, t_hresp;
  logic      [N_MON-1:0][31:0] t_haddr, t_hmaster, t_hwdata, t_hrdata;
  logic      [N_MON-1:0][1:0]  t_htrans;
  logic      [N_MON-1:0][2:0]  t_hsize;

  for (genvar k = 0; k < N_MON; k++) begin : g_mon
    transmon #(.N_APU(N_APU), .N_DPU(N_DPU)) u_mon (
      .hclk(hclk), .hresetn(hresetn),
      .apu_pol(apu_pol[k]), .dpu_pol(dpu_pol[k]),
      .hsel(s_hsel[k]), .haddr(s_addr.haddr), .htrans(s_addr.htrans),
      .hwrite(s_addr.hwrite), .hsize(s_addr.hsize), .hmaster(s_addr.hmaster),
      .hwdata(s_hwdata), .hready(s_hready),
      .hreadyout(s_hreadyout[k]), .hresp(s_hresp[k]), .hrdata(s_hrdata[k]),
      .hsel_s(t_hsel[k]), .haddr_s(t_haddr[k]), .htrans_s(t_htrans[k]),
      .hwrite_s(t_hwrite[k]), .hsize_s(t_hsize[k]), .hmaster_s(t_hmaster[k]),
      .hwdata_s(t_hwdata[k]), .hready_s(t_hready[k]),
      .hreadyout_s(t_hreadyout[k]), .hresp_s(t_hresp[k]), .hrdata_s(t_hrdata[k]),
      .irq(proc0_irq[k])
    );
  end

  for (genvar m = 0; m < N_MEM; m++) begin : g_mem_io
    assign mem_hsel[m]           = t_hsel[m];
    assign mem_addr[m].haddr     = t_haddr[m];
    assign mem_addr[m].htrans    = t_htrans[m];
    assign mem_addr[m].hwrite    = t_hwrite[m];
    assign mem_addr[m].hsize     = t_hsize[m];
    assign mem_addr[m].hmaster   = t_hmaster[m];
    assign mem_hwdata[m]         = t_hwdata[m];
    assign mem_hready[m]         = t_hready[m];
    assign t_hreadyout[m]        = mem_hreadyout[m];
    assign t_hresp[m]            = mem_hresp[m];
    assign t_hrdata[m]           = mem_hrdata[m];
  end

  // ------------------------------------------------------------ SRS
  srs #(.N_REGS(N_SRS)) u_srs (
    .hclk(hclk), .hresetn(hresetn),
    .hsel(t_hsel[N_MEM]), .haddr(t_haddr[N_MEM]), .htrans(t_htrans[N_MEM]),
    .hwrite(t_hwrite[N_MEM]), .hsize(t_hsize[N_MEM]), .hwdata(t_hwdata[N_MEM]),
    .hready(t_hready[N_MEM]), .hreadyout(t_hreadyout[N_MEM]), .hresp(t_hresp[N_MEM]),
    .hrdata(t_hrdata[N_MEM]), .gpcfg(srs_regs)
  );

endmodule
