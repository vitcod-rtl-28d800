// vitcod_top: ViTCoD sparse-attention accelerator, one attention head per run.
//
// Two-pronged datapath. The denser engine computes the attention columns of
// the global tokens (the first ngt keys after reordering) for every query;
// the sparser engine computes only the pre-indexed non-zeros of the remaining
// columns. Both use the K-stationary dataflow with inter-PE accumulation for
// S = exp(Q.K^T) and switch their MAC lines to output-stationary intra-PE
// accumulation for S.V, each into its own output buffer. The softmax
// normaliser then merges the two halves and streams out int8 results through
// the activation unit. Q and K arrive compressed over the heads and are
// recovered by the decoder engine in the load path; the encoder engine
// offers the matching compression on a separate stream (it would sit after
// the Q/K projection, which this RTL does not include). The sparser engine
// reads Q rows from the denser engine's Q buffer through query-based
// forwarding and stalls while a row has not arrived yet.
//
// Host interface: write the index tables (idx_*) and the auto-encoder
// weights (dw_* for the decoder, ew_* for the encoder), set cfg, pulse start,
// then stream K, V and Q beats on in_* (see act_loader); results appear on
// out_* and done pulses at the end. Each engine has DENSE_G / SPARSE_G row
// groups of 8 MAC lines x 8 MACs, i.e. 64 lines and 512 MACs in total at the
// defaults, the paper's MAC count. The fixed split of MAC lines between the
// engines is this design's simplification of the paper's per-task allocation.
module vitcod_top
  import vitcod_pkg::*;
#(
  parameter int unsigned DENSE_G  = 4,
  parameter int unsigned SPARSE_G = 4,
  parameter int unsigned NGT_MAX  = 64,
  localparam int unsigned IN_W    = C_HEADS * TILE_W,
  localparam int unsigned WA      = $clog2(C_HEADS * H_HEADS),
  localparam int unsigned IAW     = $clog2(IDX_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // index buffer and auto-encoder weights
  input  logic              idx_we,
  input  logic [IAW-1:0]    idx_addr,
  input  logic [15:0]       idx_data,
  input  logic              dw_we,
  input  logic [WA-1:0]     dw_addr,
  input  logic signed [DATA_W-1:0] dw_data,
  input  logic              ew_we,
  input  logic [WA-1:0]     ew_addr,
  input  logic signed [DATA_W-1:0] ew_data,
  // load stream from off-chip memory
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IN_W-1:0]   in_data,
  // result stream to off-chip memory
  output logic              out_valid,
  input  logic              out_ready,
  output logic [TOK_W-1:0]  out_row,
  output logic [2:0]        out_tile,
  output logic [TILE_W-1:0] out_data,
  // encoder stream (H_HEADS x 8 features in, C_HEADS x 8 features out)
  input  logic              enc_in_valid,
  input  logic [H_HEADS*TILE_W-1:0] enc_in_data,
  output logic              enc_out_valid,
  output logic [IN_W-1:0]   enc_out_data,
  // observation
  output logic [31:0]       cyc_total,
  output logic [31:0]       cyc_run,
  output logic [31:0]       fwd_hits,
  output logic [31:0]       fwd_stalls,
  output logic [31:0]       dense_q_stalls,
  output logic              dense_intra,
  output logic              sparse_intra
);
  localparam int unsigned OB_W = D * ACC_W + ACC_W;

  // configuration is captured at start; cfg_run is valid from that cycle on
  cfg_t cfg_q, cfg_run;
  assign cfg_run = (start && !busy) ? cfg : cfg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                cfg_q <= '0;
    else if (start && !busy)   cfg_q <= cfg;
  end

  logic ld_start, q_clr, ld_kv_done, ld_done, eng_start;
  logic d_busy, d_done, s_busy, s_done, norm_start, norm_done;

  vitcod_ctrl u_ctrl (
    .clk, .rst_n, .start(start && !busy), .busy, .done,
    .ld_start, .q_clr, .ld_kv_done, .ld_done, .eng_start,
    .d_done, .s_done, .d_busy, .s_busy, .norm_start, .norm_done,
    .cyc_total, .cyc_run);

  // ---------------- load path with decoder ----------------
  logic              ld_we_d, ld_we_s;
  ld_kind_e          ld_kind;
  logic [TOK_W-1:0]  ld_row;
  logic [2:0]        ld_tile;
  logic [TILE_W-1:0] ld_data;

  act_loader u_loader (
    .clk, .rst_n, .start(ld_start), .n_tok(cfg_run.n_tok), .ngt(cfg_run.ngt), .head(cfg_run.head),
    .dw_we, .dw_addr, .dw_data,
    .in_valid, .in_ready, .in_data,
    .ld_we_d, .ld_we_s, .ld_kind, .ld_row, .ld_tile, .ld_data,
    .kv_done(ld_kv_done), .done(ld_done));

  // ---------------- engines and forwarding ----------------
  logic [N_MAX-1:0] q_present;
  logic             s_req  [SPARSE_G];
  logic [TOK_W-1:0] s_row  [SPARSE_G];
  logic [TOK_W-1:0] f_row  [SPARSE_G];
  logic [ROW_W-1:0] f_data [SPARSE_G];
  logic             f_stall;
  logic [TOK_W-1:0] ob_row;
  logic [OB_W-1:0]  ob_d, ob_s;

  denser_engine #(.G(DENSE_G), .GS(SPARSE_G), .NGT_MAX(NGT_MAX)) u_dense (
    .clk, .rst_n, .n_tok(cfg_q.n_tok), .ngt(cfg_q.ngt), .score_shift(cfg_q.score_shift),
    .start(eng_start), .busy(d_busy), .done(d_done),
    .q_clr, .ld_we(ld_we_d), .ld_kind, .ld_row, .ld_tile, .ld_data, .q_present,
    .fwd_row(f_row), .fwd_data(f_data),
    .ob_row, .ob_data(ob_d), .intra_mode(dense_intra), .stall_cycles(dense_q_stalls));

  q_forward #(.G(SPARSE_G)) u_fwd (
    .clk, .rst_n, .clr_cnt(q_clr), .req_valid(s_req), .req_row(s_row), .q_present,
    .fwd_row(f_row), .stall(f_stall), .hits(fwd_hits), .stalls(fwd_stalls));

  sparser_engine #(.G(SPARSE_G)) u_sparse (
    .clk, .rst_n, .n_tok(cfg_q.n_tok), .ngt(cfg_q.ngt), .score_shift(cfg_q.score_shift),
    .start(eng_start), .busy(s_busy), .done(s_done),
    .ld_we(ld_we_s), .ld_kind, .ld_row, .ld_tile, .ld_data,
    .idx_we, .idx_addr, .idx_data,
    .q_req(s_req), .q_row(s_row), .q_data(f_data), .q_stall(f_stall),
    .ob_row, .ob_data(ob_s), .intra_mode(sparse_intra));

  // ---------------- softmax normalisation and output ----------------
  softmax_normalizer u_norm (
    .clk, .rst_n, .start(norm_start), .n_tok(cfg_q.n_tok), .act_mode(cfg_q.act_mode),
    .ob_row, .ob_d, .ob_s, .out_valid, .out_ready, .out_row, .out_tile, .out_data,
    .done(norm_done));

  // ---------------- encoder engine ----------------
  logic signed [DATA_W-1:0] enc_in  [H_HEADS][MACS];
  logic signed [DATA_W-1:0] enc_out [C_HEADS][MACS];
  always_comb begin
    for (int h = 0; h < H_HEADS; h++)
      for (int m = 0; m < MACS; m++) enc_in[h][m] = enc_in_data[(h*MACS+m)*DATA_W +: DATA_W];
    for (int c = 0; c < C_HEADS; c++)
      for (int m = 0; m < MACS; m++) enc_out_data[(c*MACS+m)*DATA_W +: DATA_W] = enc_out[c][m];
  end
  ae_engine #(.IN_H(H_HEADS), .OUT_H(C_HEADS), .LANES(MACS)) u_encoder (
    .clk, .rst_n, .w_we(ew_we), .w_addr(ew_addr), .w_data(ew_data),
    .in_valid(enc_in_valid), .in_vec(enc_in), .out_valid(enc_out_valid), .out_vec(enc_out));
endmodule
