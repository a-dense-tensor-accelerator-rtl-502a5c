// vm_pkg: sizes, types and configuration records shared by the VectorMesh RTL.
//
// The architectural numbers follow the paper: 32 PEs per TEU, 2^5 = 32 banks per
// input buffer, 256-byte banks (8 KB per buffer, two buffers), a 5 KB PSum buffer
// made of two SRAMs, and mesh FIFOs of four entries of 32 words. The word widths
// (16-bit operands, 32-bit partial sums) are this design's choice; the paper does
// not give a number format.
package vm_pkg;

  // ---- architecture (paper) ----
  localparam int unsigned LANES       = 32;   // PEs per TEU, words per vector
  localparam int unsigned LANE_BITS   = 5;    // X = 5, 2^X banks
  localparam int unsigned BANK_BYTES  = 256;  // one input-buffer SRAM
  localparam int unsigned PSUM_BYTES  = 5120; // PSum buffer, both SRAMs
  localparam int unsigned FIFO_DEPTH  = 4;    // mesh FIFO entries

  // ---- number format (own choice) ----
  localparam int unsigned DATA_W      = 16;   // operand word
  localparam int unsigned PSUM_W      = 32;   // partial-sum word

  // ---- derived ----
  localparam int unsigned BANK_DEPTH  = BANK_BYTES * 8 / DATA_W;             // 128 rows
  localparam int unsigned ROW_W       = $clog2(BANK_DEPTH);                  // 7
  localparam int unsigned ADDR_W      = ROW_W + LANE_BITS;                   // 12, word address
  localparam int unsigned PSUM_DEPTH  = PSUM_BYTES * 8 / 2 / (LANES*PSUM_W); // 20 rows per SRAM
  localparam int unsigned PADDR_W     = $clog2(PSUM_DEPTH);                  // 5
  localparam int unsigned CNT_W       = 12;                                  // loop counters

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [LANE_BITS-1:0]     lane_t;
  typedef logic [ROW_W-1:0]         row_t;
  typedef logic [PADDR_W-1:0]       paddr_t;
  typedef logic [CNT_W-1:0]         cnt_t;

  typedef data_t [LANES-1:0] vec_t;   // one 32-word operand vector
  typedef psum_t [LANES-1:0] pvec_t;  // one 32-word PSum row

  // Where an operand vector comes from: the TEU's own input buffer, or the
  // mesh FIFO on the negative side (north for operand 0, west for operand 1)
  // or on the positive side (south / east).
  typedef enum logic [1:0] {SRC_LOCAL = 2'd0, SRC_NEG = 2'd1, SRC_POS = 2'd2} src_e;
  // Where the operand vector is forwarded to, after use.
  typedef enum logic [1:0] {FWD_NONE = 2'd0, FWD_NEG = 2'd1, FWD_POS = 2'd2} fwd_e;

  // Address pattern of one operand. Word address of PE N at loop point
  // (i3,i2,i1,i0):
  //   A_N = base + i3*s3 + i2*s2 + i1*s1 + i0*s0 + sum_b N[b]*2^b*o[b]  (mod 2^ADDR_W)
  typedef struct packed {
    addr_t                 base;
    addr_t                 s0;
    addr_t                 s1;
    addr_t                 s2;
    addr_t                 s3;
    addr_t [LANE_BITS-1:0] o;
    src_e                  src;
    fwd_e                  fwd;
  } opcfg_t;

  // One tile job of a TEU: four nested loops, i3 outermost. i3 selects the
  // PSum row; (i2,i1,i0) are temporal and accumulate into that row (for a
  // convolution: input channel, kernel row, kernel column).
  typedef struct packed {
    cnt_t      n0;        // inner trip count (>=1)
    cnt_t      n1;        // trip counts (>=1)
    cnt_t      n2;
    cnt_t      n3;        // outer trip count (>=1), PSum rows
    paddr_t    pbase;     // first PSum row
    logic      acc_sel;   // PSum SRAM that accumulates
    logic      accum;     // 1: add to the PSum already held, 0: start from zero
    opcfg_t    op0;       // operand 0, buffer 0, vertical FIFOs
    opcfg_t    op1;       // operand 1, buffer 1, horizontal FIFOs
  } teucfg_t;

endpackage
