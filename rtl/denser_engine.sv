// denser_engine: the ViTCoD engine for the dense (global-token) columns.
//
// After reordering, the first ngt key columns of every attention map are
// global tokens that nearly every query attends to. This engine computes that
// dense block in two phases, switching its MAC lines between the two
// accumulation modes:
//
//  SDDMM  S[i][j] = exp(Q[i].K[j]) for j < ngt and all i < n_tok.
//         K-stationary: key row j is latched into k_reg (1 cycle), then the G
//         row groups take queries i..i+G-1 each cycle with inter-PE
//         accumulation, one full dot product per group per cycle. The softmax
//         exponential is applied and S is written a cycle later. A query whose
//         row has not yet arrived (q_present) stalls the engine.
//  SpMM   V'[i] = sum_j S[i][j] * V[j] for j < ngt, output-stationary: the G
//         groups each own one output row, every MAC owns one output feature
//         and accumulates over j (intra-PE accumulation); one clear cycle,
//         ngt accumulate cycles and one write-back cycle per G rows. The row
//         sum of the exponentials is accumulated alongside.
//
// Results go to this engine's own output buffer, one word per row:
// {row_sum, acc[D-1] .. acc[0]}. Cycle count without stalls:
//   ngt*(1 + ceil(n_tok/G)) + 1 + ceil(n_tok/G)*(ngt + 2) + 1.
// The engine also owns the Q buffer for all n_tok queries; it serves the
// sparser engine through GS extra read ports (query-based forwarding).
// The dataflows, the mode switch and the separate output buffer follow the
// paper; G (row groups, 8 MAC lines each), the buffer organisation and the
// cycle schedule are this design's own.
module denser_engine
  import vitcod_pkg::*;
#(
  parameter int unsigned G       = 4,
  parameter int unsigned GS      = 4,
  parameter int unsigned NGT_MAX = 64,
  localparam int unsigned OB_W   = D * ACC_W + ACC_W,
  localparam int unsigned SAW    = $clog2(N_MAX * NGT_MAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TOK_W-1:0]  n_tok,
  input  logic [TOK_W-1:0]  ngt,
  input  logic [4:0]        score_shift,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // load port from the loader
  input  logic              q_clr,
  input  logic              ld_we,
  input  ld_kind_e          ld_kind,
  input  logic [TOK_W-1:0]  ld_row,
  input  logic [2:0]        ld_tile,
  input  logic [TILE_W-1:0] ld_data,
  output logic [N_MAX-1:0]  q_present,
  // Q forwarding read ports
  input  logic [TOK_W-1:0]  fwd_row  [GS],
  output logic [ROW_W-1:0]  fwd_data [GS],
  // output buffer read port
  input  logic [TOK_W-1:0]  ob_row,
  output logic [OB_W-1:0]   ob_data,
  // observation
  output logic              intra_mode,
  output logic [31:0]       stall_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_LOADK, S_SD, S_DRAIN, S_SPCLR, S_SP, S_WB, S_DONE} st_e;
  st_e st;

  logic [TOK_W-1:0] j, i;
  logic [ROW_W-1:0] k_reg;

  // ---------------- buffers ----------------
  // Q buffer: N_MAX rows, G engine ports + GS forwarding ports
  logic             qb_we [1];
  logic [TOK_W-1:0] qb_wa [1];
  logic [TILES-1:0] qb_ws [1];
  logic [ROW_W-1:0] qb_wd [1];
  logic [TOK_W-1:0] qb_ra [G+GS];
  logic [ROW_W-1:0] qb_rd [G+GS];
  // K and V buffers: NGT_MAX rows
  logic             kb_we [1], vb_we [1];
  logic [$clog2(NGT_MAX)-1:0] kv_wa [1], kb_ra [1], vb_ra [1];
  logic [ROW_W-1:0] kb_rd [1], vb_rd [1];
  // S buffer: N_MAX x NGT_MAX exp values
  logic             sb_we [G];
  logic [SAW-1:0]   sb_wa [G], sb_ra [G];
  logic [0:0]       sb_ws [G];
  logic [E_W-1:0]   sb_wd [G], sb_rd [G];
  // output buffer
  logic             ob_we [G];
  logic [TOK_W-1:0] ob_wa [G], ob_ra [1];
  logic [0:0]       ob_ws [G];
  logic [OB_W-1:0]  ob_wd [G], ob_rd [1];

  assign qb_we[0] = ld_we && (ld_kind == LD_Q);
  assign qb_wa[0] = ld_row;
  assign qb_ws[0] = TILES'(1) << ld_tile;
  assign qb_wd[0] = {TILES{ld_data}};
  assign kb_we[0] = ld_we && (ld_kind == LD_K);
  assign vb_we[0] = ld_we && (ld_kind == LD_V);
  assign kv_wa[0] = ld_row[$clog2(NGT_MAX)-1:0];

  local_buffer #(.WIDTH(ROW_W), .DEPTH(N_MAX), .NR(G+GS), .NW(1), .SEGS(TILES)) u_qbuf (
    .clk, .we(qb_we), .waddr(qb_wa), .wseg(qb_ws), .wdata(qb_wd), .raddr(qb_ra), .rdata(qb_rd));
  local_buffer #(.WIDTH(ROW_W), .DEPTH(NGT_MAX), .NR(1), .NW(1), .SEGS(TILES)) u_kbuf (
    .clk, .we(kb_we), .waddr(kv_wa), .wseg(qb_ws), .wdata(qb_wd), .raddr(kb_ra), .rdata(kb_rd));
  local_buffer #(.WIDTH(ROW_W), .DEPTH(NGT_MAX), .NR(1), .NW(1), .SEGS(TILES)) u_vbuf (
    .clk, .we(vb_we), .waddr(kv_wa), .wseg(qb_ws), .wdata(qb_wd), .raddr(vb_ra), .rdata(vb_rd));
  local_buffer #(.WIDTH(E_W), .DEPTH(N_MAX*NGT_MAX), .NR(G), .NW(G), .SEGS(1)) u_sbuf (
    .clk, .we(sb_we), .waddr(sb_wa), .wseg(sb_ws), .wdata(sb_wd), .raddr(sb_ra), .rdata(sb_rd));
  local_buffer #(.WIDTH(OB_W), .DEPTH(N_MAX), .NR(1), .NW(G), .SEGS(1)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_wa), .wseg(ob_ws), .wdata(ob_wd), .raddr(ob_ra), .rdata(ob_rd));

  // Q rows become present once their last tile is written
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q_present <= '0;
    else if (q_clr) q_present <= '0;
    else if (qb_we[0] && (ld_tile == 3'(TILES-1)) && (32'(ld_row) < N_MAX))
      q_present[ld_row] <= 1'b1;
  end

  for (genvar p = 0; p < GS; p++) begin : g_fwd
    assign qb_ra[G+p]  = fwd_row[p];
    assign fwd_data[p] = qb_rd[G+p];
  end
  assign ob_ra[0] = ob_row;
  assign ob_data  = ob_rd[0];
  assign kb_ra[0] = j[$clog2(NGT_MAX)-1:0];
  assign vb_ra[0] = j[$clog2(NGT_MAX)-1:0];

  // ---------------- MAC groups ----------------
  logic                    act   [G];
  logic [TOK_W-1:0]        row   [G];
  logic [D*B_W-1:0]        b_row [G];
  logic [ROW_W-1:0]        a_row [G];
  logic signed [ACC_W-1:0] dot   [G];
  logic [D*ACC_W-1:0]      acc   [G];
  logic [E_W-1:0]          e     [G];
  logic signed [DATA_W-1:0] score [G];
  logic                    stall, mac_en, mac_clr, last_i;

  assign intra_mode = (st == S_SPCLR) || (st == S_SP) || (st == S_WB);
  assign mac_en  = (st == S_SPCLR) || (st == S_SP);
  assign mac_clr = (st == S_SPCLR);
  assign last_i  = (32'(i) + G >= 32'(n_tok));

  // buffer addresses depend only on the sequencer
  always_comb begin
    for (int g = 0; g < G; g++) begin
      row[g]   = TOK_W'(32'(i) + g);
      act[g]   = (32'(i) + g) < 32'(n_tok);
      qb_ra[g] = row[g];
      sb_ra[g] = SAW'(32'(row[g]) * NGT_MAX + 32'(j));
    end
  end

  always_comb begin
    stall = 1'b0;
    for (int g = 0; g < G; g++) begin
      if (st == S_SD && act[g] && !q_present[row[g]]) stall = 1'b1;
      for (int f = 0; f < D; f++) begin
        if (st == S_SD) begin
          a_row[g][f*DATA_W +: DATA_W] = qb_rd[g][f*DATA_W +: DATA_W];
          b_row[g][f*B_W +: B_W]       = B_W'($signed(k_reg[f*DATA_W +: DATA_W]));
        end else begin
          a_row[g][f*DATA_W +: DATA_W] = vb_rd[0][f*DATA_W +: DATA_W];
          b_row[g][f*B_W +: B_W]       = (st == S_SP) ? {1'b0, sb_rd[g]} : '0;
        end
      end
    end
  end

  for (genvar g = 0; g < G; g++) begin : g_grp
    mac_group u_grp (
      .clk, .rst_n, .en(mac_en), .intra(intra_mode), .clr(mac_clr),
      .a_row(a_row[g]), .b_row(b_row[g]), .dot(dot[g]), .acc_row(acc[g]));
    softmax_unit u_exp (.dot(dot[g]), .shift(score_shift), .score(score[g]), .e(e[g]));
  end

  // ---------------- S write stage and row sums ----------------
  logic             wb_v   [G];
  logic [SAW-1:0]   wb_a   [G];
  logic [E_W-1:0]   wb_e   [G];
  logic [ACC_W-1:0] rsum   [G];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < G; g++) begin
        wb_v[g] <= 1'b0; wb_a[g] <= '0; wb_e[g] <= '0; rsum[g] <= '0;
      end
    end else begin
      for (int g = 0; g < G; g++) begin
        wb_v[g] <= (st == S_SD) && !stall && act[g];
        wb_a[g] <= sb_ra[g];
        wb_e[g] <= e[g];
        if (st == S_SPCLR)   rsum[g] <= '0;
        else if (st == S_SP) rsum[g] <= rsum[g] + ACC_W'(sb_rd[g]);
      end
    end
  end

  always_comb begin
    for (int g = 0; g < G; g++) begin
      sb_we[g] = wb_v[g];
      sb_wa[g] = wb_a[g];
      sb_ws[g] = 1'b1;
      sb_wd[g] = wb_e[g];
      ob_we[g] = (st == S_WB) && act[g];
      ob_wa[g] = row[g];
      ob_ws[g] = 1'b1;
      ob_wd[g] = (ngt == 0) ? '0 : {rsum[g], acc[g]};
    end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; j <= '0; k_reg <= '0; stall_cycles <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          i <= '0; j <= '0; stall_cycles <= '0;
          st <= (ngt == 0) ? S_SPCLR : S_LOADK;
        end
        S_LOADK: begin
          k_reg <= kb_rd[0];
          i <= '0;
          st <= S_SD;
        end
        S_SD: begin
          if (stall) stall_cycles <= stall_cycles + 1;
          else if (last_i) begin
            if (32'(j) + 1 >= 32'(ngt)) st <= S_DRAIN;
            else begin j <= j + 1'b1; st <= S_LOADK; end
          end else i <= TOK_W'(32'(i) + G);
        end
        S_DRAIN: begin i <= '0; j <= '0; st <= S_SPCLR; end
        S_SPCLR: begin j <= '0; st <= (ngt == 0) ? S_WB : S_SP; end
        S_SP: begin
          if (32'(j) + 1 >= 32'(ngt)) st <= S_WB;
          else j <= j + 1'b1;
        end
        S_WB: begin
          if (last_i) st <= S_DONE;
          else begin i <= TOK_W'(32'(i) + G); st <= S_SPCLR; end
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
  assign done = (st == S_DONE);

  // the controller starts the engine only when it is idle
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> st == S_IDLE);
endmodule
