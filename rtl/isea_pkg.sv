// isea_pkg -- types and constants shared by the ISEA interposer RTL.
//
// Holds the AHB-Lite signal bundles used between a master and its bus
// interface, the policy record formats of the APU and DPU policy register
// spaces, the system address map and the fixed master IDs.
//
// The policy fields are 32 bits wide, as in the published register dumps
// (apumid[i][31:0], dpuaddr[i][31:0], ...).  The address map and the master
// ID numbering are this design's choice: the paper gives neither beyond the
// example addresses of its simulations (the shared register space is placed
// at 0x4002_0000 so that register 39 sits at 0x4002_009C as in those dumps).
package isea_pkg;

  // ---------------------------------------------------------------- AHB-Lite
  localparam logic [1:0] HTRANS_IDLE   = 2'b00;
  localparam logic [1:0] HTRANS_BUSY   = 2'b01;
  localparam logic [1:0] HTRANS_NONSEQ = 2'b10;
  localparam logic [1:0] HTRANS_SEQ    = 2'b11;

  localparam logic [2:0] HSIZE_BYTE = 3'b000;
  localparam logic [2:0] HSIZE_HALF = 3'b001;
  localparam logic [2:0] HSIZE_WORD = 3'b010;

  // Master -> bus (what a Cortex-M0 drives). hwdata belongs to the data phase.
  typedef struct packed {
    logic [31:0] haddr;
    logic [1:0]  htrans;
    logic        hwrite;
    logic [2:0]  hsize;
    logic [31:0] hwdata;
  } ahb_m2s_t;

  // Bus -> master.
  typedef struct packed {
    logic [31:0] hrdata;
    logic        hready;
    logic        hresp;   // 1 = ERROR
  } ahb_s2m_t;

  // Address phase on the shared bus, stamped with the master ID by the BI.
  typedef struct packed {
    logic [31:0] haddr;
    logic [1:0]  htrans;
    logic        hwrite;
    logic [2:0]  hsize;
    logic [31:0] hmaster;
  } ahb_addr_t;

  // ---------------------------------------------------------------- policies
  // APUPERM bit 0 allows reads, bit 1 allows writes (0000_0003 = read-write).
  localparam int PERM_R = 0;
  localparam int PERM_W = 1;

  typedef struct packed {
    logic [31:0] mid;
    logic [31:0] addr;
    logic [31:0] mask;
    logic [31:0] perm;
  } apu_policy_t;

  typedef struct packed {
    logic [31:0] mid;
    logic [31:0] addr;
    logic [31:0] data;
    logic [31:0] amask;
    logic [31:0] dmask;
  } dpu_policy_t;

  // Bit-wise range test used by both units: the policy covers every address
  // between (ADDR & ~MASK) and (ADDR | MASK) whose fixed bits equal ADDR's.
  function automatic logic masked_match(logic [31:0] value, logic [31:0] ref_v,
                                        logic [31:0] mask);
    return ((value ^ ref_v) & ~mask) == 32'h0;
  endfunction

  // ---------------------------------------------------------------- system
  localparam int N_CORES_DEF = 64;   // 4 computing chiplets x 16 cores
  localparam int N_MEM_DEF   = 4;    // 4 shared-memory chiplets
  localparam int N_APU_DEF   = 16;   // APU policies per TRANSMON
  localparam int N_DPU_DEF   = 16;   // DPU policies per TRANSMON

  // Master IDs: PROC-0 is 0, untrusted core PROC-k is k, the Secure
  // Interface comes after the last core.
  localparam logic [31:0] MID_PROC0 = 32'd0;
  function automatic logic [31:0] mid_si(int n_cores);
    return 32'(n_cores + 1);
  endfunction

  // Address map.
  localparam logic [31:0] MEM_BASE  = 32'h2000_0000;  // chiplet m at + m*MEM_SPAN
  localparam logic [31:0] MEM_SPAN  = 32'h0010_0000;  // 1 MB each
  localparam logic [31:0] SRS_BASE  = 32'h4002_0000;
  localparam logic [31:0] SRS_SPAN  = 32'h0000_1000;
  localparam logic [31:0] PRS_BASE  = 32'h5000_0000;  // PRS k at + k*PRS_SPAN
  localparam logic [31:0] PRS_SPAN  = 32'h0000_4000;

  // PRS register map (byte offsets inside one PRS window).
  localparam logic [13:0] PRS_APU_OFS = 14'h0000;  // + i*16 + field*4
  localparam logic [13:0] PRS_DPU_OFS = 14'h2000;  // + j*32 + field*4

  // Byte-lane enables of a transfer (little endian, 32-bit bus).
  function automatic logic [3:0] byte_lanes(logic [2:0] hsize, logic [1:0] a);
    unique case (hsize)
      HSIZE_BYTE: return 4'b0001 << a;
      HSIZE_HALF: return a[1] ? 4'b1100 : 4'b0011;
      default:    return 4'b1111;
    endcase
  endfunction

endpackage
