// ahb_interconnect -- the shared AHB-Lite fabric of the interposer.
//
// Connects N_MST master bus interfaces to the slaves of ahb_decoder's map:
//   arbiter   grants one BI's address phase per transfer (round robin);
//   address   the granted BI's address/control/master ID go to all slaves,
//             with HSEL from the decoder;
//   write     HWDATA is taken from the data-phase owner (dgrant);
//   response  HREADY/HRESP/HRDATA come from the slave selected in the
//             previous address phase; HREADY is 1 when no slave is in a data
//             phase.  The response goes to every BI, and each BI passes it
//             on only when it owns the data phase.
// A default slave inside answers unmapped addresses with ERROR.
// Standard AHB-Lite pipeline: a new address phase overlaps the current data
// phase and both advance when HREADY is high.  The paper names arbiters,
// decoders and multiplexers as the fabric's parts; a single shared bus (not a
// matrix) is this design's choice.
module ahb_interconnect
  import isea_pkg::*;
#(
  parameter int N_MST = N_CORES_DEF + 2,
  parameter int N_MEM = N_MEM_DEF,
  parameter int N_SLV = 2 * N_MEM + 2
) (
  input  logic                    hclk,
  input  logic                    hresetn,
  // master bus interfaces
  input  logic      [N_MST-1:0]   m_req,
  input  ahb_addr_t [N_MST-1:0]   m_addr,
  input  logic      [N_MST-1:0][31:0] m_hwdata,
  output logic      [N_MST-1:0]   m_grant,
  output logic      [N_MST-1:0]   m_dgrant,
  output ahb_s2m_t                bus_rsp,
  // slaves
  output logic      [N_SLV-1:0]   s_hsel,
  output ahb_addr_t               s_addr,
  output logic      [31:0]        s_hwdata,
  output logic                    s_hready,
  input  logic      [N_SLV-1:0]   s_hreadyout,
  input  logic      [N_SLV-1:0]   s_hresp,
  input  logic      [N_SLV-1:0][31:0] s_hrdata
);

  logic             hready;
  logic [N_SLV-1:0] dsel;       // slave in data phase
  logic             dsel_def;
  logic             hsel_def;
  logic [N_SLV-1:0] hsel_dec;
  logic             def_ready, def_resp;
  logic [31:0]      def_rdata;

  ahb_arbiter #(.N(N_MST)) u_arb (
    .hclk(hclk), .hresetn(hresetn), .req(m_req), .hready(hready),
    .grant(m_grant), .dgrant(m_dgrant)
  );

  // Address/control multiplexer.
  always_comb begin
    s_addr = '0;
    for (int i = 0; i < N_MST; i++)
      if (m_grant[i]) s_addr = m_addr[i];
  end

  ahb_decoder #(.N_MEM(N_MEM), .N_SLV(N_SLV)) u_dec (
    .haddr(s_addr.haddr), .hsel(hsel_dec), .hsel_def(hsel_def)
  );
  assign s_hsel = (s_addr.htrans[1]) ? hsel_dec : '0;

  // Write-data multiplexer.
  always_comb begin
    s_hwdata = '0;
    for (int i = 0; i < N_MST; i++)
      if (m_dgrant[i]) s_hwdata = m_hwdata[i];
  end

  ahb_default_slave u_def (
    .hclk(hclk), .hresetn(hresetn), .hsel(hsel_def), .htrans(s_addr.htrans),
    .hready(hready), .hreadyout(def_ready), .hresp(def_resp), .hrdata(def_rdata)
  );

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      dsel     <= '0;
      dsel_def <= 1'b0;
    end else if (hready) begin
      dsel     <= s_hsel;
      dsel_def <= hsel_def && s_addr.htrans[1];
    end
  end

  // Response multiplexer.
  always_comb begin
    bus_rsp.hready = 1'b1;
    bus_rsp.hresp  = 1'b0;
    bus_rsp.hrdata = '0;
    if (dsel_def) begin
      bus_rsp.hready = def_ready;
      bus_rsp.hresp  = def_resp;
      bus_rsp.hrdata = def_rdata;
    end
    for (int s = 0; s < N_SLV; s++)
      if (dsel[s]) begin
        bus_rsp.hready = s_hreadyout[s];
        bus_rsp.hresp  = s_hresp[s];
        bus_rsp.hrdata = s_hrdata[s];
      end
  end
  assign hready   = bus_rsp.hready;
  assign s_hready = hready;

endmodule
