// secure_if -- Secure Interface (SI) between the external Trusted
// Configuration Unit (TCU) and the AHB-Lite.
//
// The TCU loads programs, initial data and policies and reads results back
// through the SI, which is an ordinary bus master behind its own bus
// interface; its master ID is one of the two privileged IDs that may program
// the policy register spaces.  Memory it touches is still checked by the
// TRANSMONs like any other master's.
//
// TCU side: a command is taken when tcu_valid and tcu_ready are both high
// (tcu_write, tcu_addr, tcu_wdata; whole words).  The SI then runs one AHB
// transfer (address phase, data phase) and returns one tcu_rvalid pulse with
// tcu_rdata (reads) and tcu_err (ERROR response).  tcu_ready is high only
// while the SI is idle.  The SI's role follows the paper; its TCU protocol is
// this design's choice.
module secure_if
  import isea_pkg::*;
(
  input  logic        hclk,
  input  logic        hresetn,
  // TCU side
  input  logic        tcu_valid,
  output logic        tcu_ready,
  input  logic        tcu_write,
  input  logic [31:0] tcu_addr,
  input  logic [31:0] tcu_wdata,
  output logic        tcu_rvalid,
  output logic [31:0] tcu_rdata,
  output logic        tcu_err,
  // AHB-Lite master side
  output ahb_m2s_t    m_req,
  input  ahb_s2m_t    m_rsp
);

  typedef enum logic [1:0] {SI_IDLE, SI_ADDR, SI_DATA} sistate_t;
  sistate_t    state;
  logic        write_q;
  logic [31:0] addr_q, wdata_q;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state      <= SI_IDLE;
      write_q    <= 1'b0;
      addr_q     <= '0;
      wdata_q    <= '0;
      tcu_rvalid <= 1'b0;
      tcu_rdata  <= '0;
      tcu_err    <= 1'b0;
    end else begin
      tcu_rvalid <= 1'b0;
      unique case (state)
        SI_IDLE: if (tcu_valid) begin
          state   <= SI_ADDR;
          write_q <= tcu_write;
          addr_q  <= tcu_addr;
          wdata_q <= tcu_wdata;
        end
        SI_ADDR: if (m_rsp.hready) state <= SI_DATA;
        default: if (m_rsp.hready) begin
          state      <= SI_IDLE;
          tcu_rvalid <= 1'b1;
          tcu_rdata  <= write_q ? '0 : m_rsp.hrdata;
          tcu_err    <= m_rsp.hresp;
        end
      endcase
    end
  end

  assign tcu_ready = (state == SI_IDLE);

  always_comb begin
    m_req.haddr  = addr_q;
    m_req.htrans = (state == SI_ADDR) ? HTRANS_NONSEQ : HTRANS_IDLE;
    m_req.hwrite = write_q;
    m_req.hsize  = HSIZE_WORD;
    m_req.hwdata = wdata_q;
  end

endmodule
