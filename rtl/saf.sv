// saf -- Slave Access Filter of a TRANSMON.
//
// Sits between the AHB-Lite slave port of the TRANSMON and the memory
// controller and decides, per transfer, what reaches the memory:
//   * APU denies            -> dropped; the master gets a two-cycle ERROR
//                              (HRESP=1 with HREADY low, then high) and a
//                              one-cycle interrupt pulse goes to PROC-0.
//   * APU allows, no DPU    -> the address phase is passed through in the
//     policy covers it         same cycle (no added delay).
//   * APU allows, a DPU     -> the address phase is held in registers, the
//     policy covers it         bus is stalled one cycle (state CHECK) while the
//                              DPU compares HWDATA; restricted data is
//                              dropped with ERROR, other data is replayed to
//                              the memory controller in that same cycle.
// Nothing of a dropped transfer is visible on the memory side: address,
// master ID and write data toward the slave are driven to zero whenever no
// transfer is being forwarded.
//
// Timing (data-phase cycles seen by the master, with a memory controller of
// one wait state): approved 2, APU-denied 2, DPU-covered 3 whether approved
// or denied, so the latency does not tell a denied access from an allowed
// one.  The drop/forward/hold behaviour and the single extra cycle for
// DPU-covered writes follow the paper; the ERROR shape, the state encoding
// and the zeroing of idle slave-side signals are this design's choices.
module saf
  import isea_pkg::*;
#(
  parameter int N_DPU = N_DPU_DEF
) (
  input  logic              hclk,
  input  logic              hresetn,
  // bus side, address phase
  input  logic              hsel,
  input  logic [31:0]       haddr,
  input  logic [1:0]        htrans,
  input  logic              hwrite,
  input  logic [2:0]        hsize,
  input  logic [31:0]       hmaster,
  input  logic [31:0]       hwdata,
  input  logic              hready,
  // checker results
  input  logic              apu_allow,
  input  logic [N_DPU-1:0]  dpu_cover,
  output logic [N_DPU-1:0]  dpu_cover_q,
  input  logic              dpu_block,
  // toward the memory controller
  output logic              hsel_s,
  output logic [31:0]       haddr_s,
  output logic [1:0]        htrans_s,
  output logic              hwrite_s,
  output logic [2:0]        hsize_s,
  output logic [31:0]       hmaster_s,
  output logic [31:0]       hwdata_s,
  output logic              hready_s,
  // response control for the TRANSMON's output MUX
  output logic              use_slave,   // pass the slave's response
  output logic              own_ready,
  output logic              own_resp,
  output logic              irq
);

  typedef enum logic [2:0] {S_IDLE, S_FWD, S_CHECK, S_ERR1, S_ERR2} state_t;
  state_t state, state_n;

  logic        aphase;
  logic [31:0] haddr_q, hmaster_q;
  logic [2:0]  hsize_q;
  logic        pass;      // address phase forwarded in this cycle
  logic        replay;    // held write released toward the slave

  assign aphase = hsel && htrans[1] && hready;
  assign pass   = aphase && apu_allow && !(|dpu_cover);
  assign replay = (state == S_CHECK) && !dpu_block;

  always_comb begin
    state_n = state;
    if (hready) begin
      if (!aphase)            state_n = S_IDLE;
      else if (!apu_allow)    state_n = S_ERR1;
      else if (|dpu_cover)    state_n = S_CHECK;
      else                    state_n = S_FWD;
    end else begin
      unique case (state)
        S_CHECK: state_n = dpu_block ? S_ERR1 : S_FWD;
        S_ERR1:  state_n = S_ERR2;
        default: state_n = state;
      endcase
    end
  end

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state       <= S_IDLE;
      haddr_q     <= '0;
      hmaster_q   <= '0;
      hsize_q     <= '0;
      dpu_cover_q <= '0;
    end else begin
      state <= state_n;
      if (aphase) begin
        haddr_q     <= haddr;
        hmaster_q   <= hmaster;
        hsize_q     <= hsize;
        dpu_cover_q <= dpu_cover;
      end
    end
  end

  // Slave side: pass-through, replay of the held write, or nothing.
  always_comb begin
    hsel_s    = 1'b0;
    haddr_s   = '0;
    htrans_s  = HTRANS_IDLE;
    hwrite_s  = 1'b0;
    hsize_s   = '0;
    hmaster_s = '0;
    hready_s  = hready;
    if (replay) begin
      hsel_s    = 1'b1;
      haddr_s   = haddr_q;
      htrans_s  = HTRANS_NONSEQ;
      hwrite_s  = 1'b1;
      hsize_s   = hsize_q;
      hmaster_s = hmaster_q;
      hready_s  = 1'b1;
    end else if (state == S_CHECK) begin
      hready_s  = 1'b1;
    end else if (pass) begin
      hsel_s    = 1'b1;
      haddr_s   = haddr;
      htrans_s  = htrans;
      hwrite_s  = hwrite;
      hsize_s   = hsize;
      hmaster_s = hmaster;
    end
    hwdata_s = (state == S_FWD) ? hwdata : '0;
  end

  always_comb begin
    use_slave = (state == S_FWD);
    own_ready = (state == S_IDLE) || (state == S_ERR2);
    own_resp  = (state == S_ERR1) || (state == S_ERR2);
    irq       = (state == S_ERR1);
  end

  // A dropped transfer never reaches the memory controller.
  a_no_denied_fwd: assert property (@(posedge hclk) disable iff (!hresetn)
                                    (aphase && !apu_allow) |-> !hsel_s);
  // ERROR is always the two-cycle form.
  a_err_two_cycle: assert property (@(posedge hclk) disable iff (!hresetn)
                                    (state == S_ERR1) |=> (state == S_ERR2));

endmodule
