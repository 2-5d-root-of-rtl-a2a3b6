// srs -- Shared Register Space (gpcfg registers) in the interposer.
//
// N_REGS general-purpose 32-bit registers, gpcfg0 .. gpcfg(N_REGS-1), at
// byte offset 4*i, shared by all cores, e.g. as semaphores.  The SRS sits
// behind its own TRANSMON like any shared memory, so all access control is
// done there; the SRS itself accepts every transfer it is given.
//
// AHB-Lite slave with one wait state, the same as the memory controllers so
// that the TRANSMON's latency stays uniform: first data-phase cycle
// HREADYOUT=0 and the register is written (byte lanes from HSIZE) or read,
// second cycle HREADYOUT=1 with the read data.  Offsets beyond the last
// register read as zero and ignore writes.  All registers reset to zero
// (semaphore free).  The register array and its use for semaphores follow
// the paper; its size, wait state and reset value are this design's choices.
module srs
  import isea_pkg::*;
#(
  parameter int N_REGS = 64
) (
  input  logic                        hclk,
  input  logic                        hresetn,
  input  logic                        hsel,
  input  logic [31:0]                 haddr,
  input  logic [1:0]                  htrans,
  input  logic                        hwrite,
  input  logic [2:0]                  hsize,
  input  logic [31:0]                 hwdata,
  input  logic                        hready,
  output logic                        hreadyout,
  output logic                        hresp,
  output logic [31:0]                 hrdata,
  output logic [N_REGS-1:0][31:0]     gpcfg
);

  localparam int IW = $clog2(N_REGS);

  typedef enum logic [1:0] {R_IDLE, R_W1, R_W2} rstate_t;
  rstate_t     state;
  logic        write_q, inrange_q;
  logic [IW-1:0] idx_q;
  logic [3:0]  lanes_q;
  logic [31:0] rdata_q;
  logic        aphase;

  assign aphase = hsel && htrans[1] && hready;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      state     <= R_IDLE;
      write_q   <= 1'b0;
      inrange_q <= 1'b0;
      idx_q     <= '0;
      lanes_q   <= '0;
      rdata_q   <= '0;
      gpcfg     <= '0;
    end else begin
      unique case (state)
        R_W1: begin
          state <= R_W2;
          if (inrange_q) begin
            if (write_q) begin
              for (int b = 0; b < 4; b++)
                if (lanes_q[b]) gpcfg[idx_q][8*b +: 8] <= hwdata[8*b +: 8];
            end else begin
              rdata_q <= gpcfg[idx_q];
            end
          end else begin
            rdata_q <= '0;
          end
        end
        default: begin
          if (hready) begin
            if (aphase) begin
              state     <= R_W1;
              write_q   <= hwrite;
              inrange_q <= (32'(haddr[11:2]) < N_REGS);
              idx_q     <= haddr[IW+1:2];
              lanes_q   <= byte_lanes(hsize, haddr[1:0]);
            end else begin
              state <= R_IDLE;
            end
          end
        end
      endcase
    end
  end

  assign hreadyout = (state != R_W1);
  assign hresp     = 1'b0;
  assign hrdata    = (state == R_W2 && !write_q) ? rdata_q : '0;

endmodule
