// ahb_master_bi -- bus interface (BI) between one master and the shared
// AHB-Lite, inside the trusted interposer.
//
// Two security jobs: every request leaves with the master ID MID wired into
// this instance (the master cannot choose or forge it), and the master sees
// response data only for its own transfers (HRDATA/HRESP are zero
// otherwise), so it cannot snoop on other masters' traffic.
//
// It also shares the bus.  The master's address phase is offered to the
// arbiter in the cycle the master drives it.  If the bus is granted to this
// BI in that cycle it goes straight through, and the transfer costs nothing
// extra.  Otherwise it is captured into a holding register and requested
// again every cycle; the master is held in its data phase (HREADY low) until
// the bus has carried the address phase and the selected slave has finished
// the data phase, whose HREADY/HRESP/HRDATA are then passed straight
// through.  The master's HWDATA is passed to the bus unchanged; it is used
// only while this BI owns the data phase.
// Timing: no added wait state on a free bus; one per cycle spent waiting
// for the grant otherwise.  SEQ transfers go out as NONSEQ.  ID stamping and
// response filtering follow the paper; the arbitration scheme and the
// holding register are this design's choice.
module ahb_master_bi
  import isea_pkg::*;
#(
  parameter logic [31:0] MID = 32'd0
) (
  input  logic      hclk,
  input  logic      hresetn,
  // master side
  input  ahb_m2s_t  m_req,
  output ahb_s2m_t  m_rsp,
  // bus side
  output logic      req,
  output ahb_addr_t b_addr,
  output logic [31:0] b_hwdata,
  input  logic      grant,     // this BI owns the address phase this cycle
  input  logic      dgrant,    // this BI owns the data phase this cycle
  input  ahb_s2m_t  bus_rsp
);

  logic        pend;
  logic [31:0] haddr_q;
  logic        hwrite_q;
  logic [2:0]  hsize_q;
  logic        accept;
  logic        direct;

  // The master's address phase is accepted whenever it sees HREADY high.  If
  // the bus takes it in that same cycle (granted, bus HREADY high) it goes
  // straight through; otherwise it is held in the registers until granted.
  assign accept = m_rsp.hready && m_req.htrans[1];
  assign direct = !pend && accept && grant && bus_rsp.hready;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      pend     <= 1'b0;
      haddr_q  <= '0;
      hwrite_q <= 1'b0;
      hsize_q  <= '0;
    end else begin
      if (accept && !direct) begin
        pend     <= 1'b1;
        haddr_q  <= m_req.haddr;
        hwrite_q <= m_req.hwrite;
        hsize_q  <= m_req.hsize;
      end else if (grant && bus_rsp.hready) begin
        pend <= 1'b0;
      end
    end
  end

  assign req = pend || accept;

  always_comb begin
    if (pend) begin
      b_addr.haddr  = haddr_q;
      b_addr.htrans = HTRANS_NONSEQ;
      b_addr.hwrite = hwrite_q;
      b_addr.hsize  = hsize_q;
    end else if (accept) begin
      b_addr.haddr  = m_req.haddr;
      b_addr.htrans = HTRANS_NONSEQ;
      b_addr.hwrite = m_req.hwrite;
      b_addr.hsize  = m_req.hsize;
    end else begin
      b_addr.haddr  = '0;
      b_addr.htrans = HTRANS_IDLE;
      b_addr.hwrite = 1'b0;
      b_addr.hsize  = '0;
    end
    b_addr.hmaster = MID;
    b_hwdata       = m_req.hwdata;

    if (dgrant) begin
      m_rsp = bus_rsp;
    end else begin
      m_rsp.hrdata = '0;
      m_rsp.hresp  = 1'b0;
      m_rsp.hready = !pend;
    end
  end

  // A second transfer is never accepted while one is still pending.
  a_one_outstanding: assert property (@(posedge hclk) disable iff (!hresetn)
                                      pend |-> !accept);

endmodule
