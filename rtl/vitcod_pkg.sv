// vitcod_pkg: sizes, fixed-point formats and index-table layout shared by the
// ViTCoD attention accelerator.
//
// Sizes that follow the paper: 197 tokens and 64 features per head (the DeiT
// mapping the paper draws), MAC lines of 8 MACs, 64 MAC lines in total, a 6->3
// head auto-encoder, a 20 KB index buffer. Everything about number formats is
// this design's choice, the paper gives no word lengths:
//   Q, K, V, outputs     signed 8 bit
//   score fed to exp     signed 8 bit, 4 fractional bits (range -8 .. +7.94)
//   exp(score)           unsigned 16 bit, 10 fractional bits (saturates at 63.99)
//   accumulators         signed 32 bit
package vitcod_pkg;

  localparam int unsigned N_MAX     = 197;  // tokens per head (paper: 197)
  localparam int unsigned D         = 64;   // features per head (paper: 64)
  localparam int unsigned MACS      = 8;    // MACs per MAC line (paper: 8)
  localparam int unsigned TOT_LINES = 64;   // MAC lines in the chip (paper: 64)
  localparam int unsigned LPG       = D / MACS;              // lines per row group
  localparam int unsigned TILES     = D / MACS;              // 8-feature tiles per row
  localparam int unsigned H_HEADS   = 6;    // heads before compression (the paper's example: 6)
  localparam int unsigned C_HEADS   = 3;    // heads after compression  (the paper's example: 3)

  localparam int unsigned DATA_W = 8;
  localparam int unsigned B_W    = 17;      // MAC B operand: int8 K or 16-bit exp value
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned E_W    = 16;
  localparam int unsigned E_FRAC = 10;
  localparam int unsigned S_FRAC = 4;       // fractional bits of the exp input

  localparam int unsigned TOK_W  = $clog2(N_MAX + 1);
  localparam int unsigned ROW_W  = D * DATA_W;            // one Q/K/V row
  localparam int unsigned TILE_W = MACS * DATA_W;         // one 8-feature tile

  // Index buffer (16-bit words, 20 KB): column pointers of the sparse part
  // (CSC), row pointers of the same non-zeros (row view used by S.V), the CSC
  // row indices, and for each row-view entry its column and CSC position.
  localparam int unsigned IDX_DEPTH   = 10240;
  localparam int unsigned COLPTR_BASE = 0;
  localparam int unsigned ROWPTR_BASE = N_MAX + 1;
  localparam int unsigned ROWIDX_BASE = 2 * (N_MAX + 1);
  localparam int unsigned NNZ_MAX     = (IDX_DEPTH - ROWIDX_BASE) / 3;
  localparam int unsigned CSRCOL_BASE = ROWIDX_BASE + NNZ_MAX;
  localparam int unsigned CSRPOS_BASE = CSRCOL_BASE + NNZ_MAX;

  // Kind of a load beat arriving from off-chip memory.
  typedef enum logic [1:0] {LD_K = 2'd0, LD_V = 2'd1, LD_Q = 2'd2} ld_kind_e;

  // Per-head configuration written by the host (what the paper's compiler emits).
  typedef struct packed {
    logic [TOK_W-1:0] n_tok;        // tokens of this head
    logic [TOK_W-1:0] ngt;          // global tokens (denser columns)
    logic [4:0]       score_shift;  // dot product >>> shift -> score with S_FRAC bits
    logic [2:0]       head;         // which decoded head to keep
    logic [1:0]       act_mode;     // activation on the output path
  } cfg_t;

  function automatic logic signed [DATA_W-1:0] sat8(input logic signed [ACC_W:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return -8'sd128;
    else               return v[DATA_W-1:0];
  endfunction

endpackage
