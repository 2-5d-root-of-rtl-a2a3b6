// prs -- Policy Register Space of one TRANSMON.
//
// Flip-flop storage for N_APU APU policies (APUMID, APUADDR, APUMASK,
// APUPERM) and N_DPU DPU policies (DPUMID, DPUADDR, DPUDATA, DPUAMASK,
// DPUDMASK), all 32 bits.  The policies drive the TRANSMON's comparators
// continuously; they are loaded and updated over the AHB-Lite through the
// PRS's own slave port.
//
// Access: only the privileged masters PRIV0 (PROC-0) and PRIV1 (the Secure
// Interface) may read or write; any other master, and any offset that holds
// no register, gets a two-cycle ERROR and changes nothing.  Writes are whole
// words.  Register map (byte offset in the PRS window):
//   APU policy i : 0x0000 + 16*i + {0 MID, 4 ADDR, 8 MASK, 12 PERM}
//   DPU policy j : 0x2000 + 32*j + {0 MID, 4 ADDR, 8 DATA, 12 AMASK, 16 DMASK}
// Reset clears every policy, which leaves all accesses denied.
// Timing: OKAY transfers complete without wait states.
// The flip-flop PRS and its fields follow the paper; the register map, the
// access rule and the reset value are this design's choices.
module prs
  import isea_pkg::*;
#(
  parameter int          N_APU = N_APU_DEF,
  parameter int          N_DPU = N_DPU_DEF,
  parameter logic [31:0] PRIV0 = MID_PROC0,
  parameter logic [31:0] PRIV1 = 32'd65
) (
  input  logic                    hclk,
  input  logic                    hresetn,
  input  logic                    hsel,
  input  logic [31:0]             haddr,
  input  logic [1:0]              htrans,
  input  logic                    hwrite,
  input  logic [31:0]             hmaster,
  input  logic [31:0]             hwdata,
  input  logic                    hready,
  output logic                    hreadyout,
  output logic                    hresp,
  output logic [31:0]             hrdata,
  output apu_policy_t [N_APU-1:0] apu_pol,
  output dpu_policy_t [N_DPU-1:0] dpu_pol
);

  typedef enum logic [1:0] {P_IDLE, P_ACC, P_ERR1, P_ERR2} pstate_t;
  pstate_t     state;
  logic        aphase, priv, reg_ok;
  logic        is_dpu_q, write_q;
  logic [8:0]  idx_q;
  logic [2:0]  fld_q;
  logic [13:0] ofs;

  assign aphase = hsel && htrans[1] && hready;
  assign priv   = (hmaster == PRIV0) || (hmaster == PRIV1);
  assign ofs    = haddr[13:0];

  always_comb begin
    if (ofs[13]) reg_ok = (32'(ofs[12:5]) < N_DPU) && (ofs[4:2] <= 3'd4) && (ofs[1:0] == 2'b0);
    else         reg_ok = (32'(ofs[12:4]) < N_APU) && (ofs[1:0] == 2'b0);
  end

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state    <= P_IDLE;
      is_dpu_q <= 1'b0;
      write_q  <= 1'b0;
      idx_q    <= '0;
      fld_q    <= '0;
    end else begin
      if (state == P_ERR1) begin
        state <= P_ERR2;
      end else if (hready) begin
        if (aphase) begin
          state    <= (priv && reg_ok) ? P_ACC : P_ERR1;
          is_dpu_q <= ofs[13];
          write_q  <= hwrite;
          idx_q    <= ofs[13] ? {1'b0, ofs[12:5]} : ofs[12:4];
          fld_q    <= ofs[13] ? ofs[4:2] : {1'b0, ofs[3:2]};
        end else begin
          state <= P_IDLE;
        end
      end
    end
  end

  // Policy registers, written in the data phase of an accepted write.
  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      apu_pol <= '0;
      dpu_pol <= '0;
    end else if (state == P_ACC && write_q) begin
      if (!is_dpu_q) begin
        for (int i = 0; i < N_APU; i++) begin
          if (32'(idx_q) == i) begin
            unique case (fld_q[1:0])
              2'd0: apu_pol[i].mid  <= hwdata;
              2'd1: apu_pol[i].addr <= hwdata;
              2'd2: apu_pol[i].mask <= hwdata;
              default: apu_pol[i].perm <= hwdata;
            endcase
          end
        end
      end else begin
        for (int j = 0; j < N_DPU; j++) begin
          if (32'(idx_q) == j) begin
            unique case (fld_q)
              3'd0: dpu_pol[j].mid   <= hwdata;
              3'd1: dpu_pol[j].addr  <= hwdata;
              3'd2: dpu_pol[j].data  <= hwdata;
              3'd3: dpu_pol[j].amask <= hwdata;
              default: dpu_pol[j].dmask <= hwdata;
            endcase
          end
        end
      end
    end
  end

  always_comb begin
    hrdata = '0;
    if (state == P_ACC && !write_q) begin
      if (!is_dpu_q) begin
        for (int i = 0; i < N_APU; i++)
          if (32'(idx_q) == i)
            unique case (fld_q[1:0])
              2'd0: hrdata = apu_pol[i].mid;
              2'd1: hrdata = apu_pol[i].addr;
              2'd2: hrdata = apu_pol[i].mask;
              default: hrdata = apu_pol[i].perm;
            endcase
      end else begin
        for (int j = 0; j < N_DPU; j++)
          if (32'(idx_q) == j)
            unique case (fld_q)
              3'd0: hrdata = dpu_pol[j].mid;
              3'd1: hrdata = dpu_pol[j].addr;
              3'd2: hrdata = dpu_pol[j].data;
              3'd3: hrdata = dpu_pol[j].amask;
              default: hrdata = dpu_pol[j].dmask;
            endcase
      end
    end
    hreadyout = (state != P_ERR1);
    hresp     = (state == P_ERR1) || (state == P_ERR2);
  end

endmodule
