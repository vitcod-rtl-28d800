// sparser_engine: the ViTCoD engine for the sparse remainder of the attention map.
//
// Columns j >= ngt hold only the few non-zeros that survive pruning, mostly
// near the diagonal. Their positions are fixed after training, so they are
// pre-loaded into the index buffer (IdxBuf):
//   col_ptr[j]   (CSC)  first non-zero of column j, col_ptr[n_tok] = nnz
//   row_idx[p]   (CSC)  query row of non-zero p
//   row_ptr[i]          first entry of row i in the row view of the same non-zeros
//   csr_col[q], csr_pos[q]  column and CSC position of row-view entry q
// (word addresses in vitcod_pkg). Only non-zeros are computed:
//
//  SDDMM  K-stationary, column by column as the CSC order gives them: key
//         row j is latched (1 cycle, which also reads col_ptr), then the G row
//         groups take G consecutive non-zeros per cycle. Their Q rows come from
//         the denser engine's Q buffer through q_forward; a missing row stalls.
//         exp(score) is written to the S buffer at the non-zero's CSC position.
//  SpMM   Output-stationary: the G groups each own one output row, read
//         row_ptr (1 clear cycle), then accumulate S*V over the row's
//         non-zeros with intra-PE accumulation (as many cycles as the longest
//         of the G rows, idle groups add zero) and write back (1 cycle).
//
// Output buffer words are {row_sum, acc[D-1] .. acc[0]}, as in the denser
// engine; the two are added by softmax_normalizer. The CSC format, the
// K-stationary/output-stationary mapping and the forwarding follow the
// paper; the extra row view in IdxBuf, G and the schedule are this design's.
module sparser_engine
  import vitcod_pkg::*;
#(
  parameter int unsigned G     = 4,
  localparam int unsigned OB_W = D * ACC_W + ACC_W,
  localparam int unsigned IAW  = $clog2(IDX_DEPTH),
  localparam int unsigned PW   = $clog2(NNZ_MAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TOK_W-1:0]  n_tok,
  input  logic [TOK_W-1:0]  ngt,
  input  logic [4:0]        score_shift,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // load port (K and V rows of the sparse columns)
  input  logic              ld_we,
  input  ld_kind_e          ld_kind,
  input  logic [TOK_W-1:0]  ld_row,
  input  logic [2:0]        ld_tile,
  input  logic [TILE_W-1:0] ld_data,
  // index buffer write port
  input  logic              idx_we,
  input  logic [IAW-1:0]    idx_addr,
  input  logic [15:0]       idx_data,
  // Q forwarding
  output logic              q_req   [G],
  output logic [TOK_W-1:0]  q_row   [G],
  input  logic [ROW_W-1:0]  q_data  [G],
  input  logic              q_stall,
  // output buffer read port
  input  logic [TOK_W-1:0]  ob_row,
  output logic [OB_W-1:0]   ob_data,
  output logic              intra_mode
);
  typedef enum logic [2:0] {S_IDLE, S_COL, S_SD, S_DRAIN, S_SPCLR, S_SP, S_WB, S_DONE} st_e;
  st_e st;

  logic [TOK_W-1:0] j, i;
  logic [15:0]      p, pend, k, maxcnt;
  logic [15:0]      rs  [G];
  logic [15:0]      cnt [G];
  logic [ROW_W-1:0] k_reg;

  // ---------------- buffers ----------------
  logic             kb_we [1], vb_we [1];
  logic [TOK_W-1:0] kv_wa [1], kb_ra [1], vb_ra [G];
  logic [TILES-1:0] kv_ws [1];
  logic [ROW_W-1:0] kv_wd [1], kb_rd [1], vb_rd [G];
  logic             ib_we [1];
  logic [IAW-1:0]   ib_wa [1], ib_ra [2*G];
  logic [0:0]       one   [G];
  logic [15:0]      ib_wd [1], ib_rd [2*G];
  logic             sb_we [G];
  logic [PW-1:0]    sb_wa [G], sb_ra [G];
  logic [E_W-1:0]   sb_wd [G], sb_rd [G];
  logic             ob_we [G];
  logic [TOK_W-1:0] ob_wa [G], ob_ra [1];
  logic [OB_W-1:0]  ob_wd [G], ob_rd [1];

  assign kv_wa[0] = ld_row;
  assign kv_ws[0] = TILES'(1) << ld_tile;
  assign kv_wd[0] = {TILES{ld_data}};
  assign kb_we[0] = ld_we && (ld_kind == LD_K);
  assign vb_we[0] = ld_we && (ld_kind == LD_V);
  assign ib_we[0] = idx_we;
  assign ib_wa[0] = idx_addr;
  assign ib_wd[0] = idx_data;
  for (genvar g = 0; g < G; g++) begin : g_one
    assign one[g] = 1'b1;
  end

  local_buffer #(.WIDTH(ROW_W), .DEPTH(N_MAX), .NR(1), .NW(1), .SEGS(TILES)) u_kbuf (
    .clk, .we(kb_we), .waddr(kv_wa), .wseg(kv_ws), .wdata(kv_wd), .raddr(kb_ra), .rdata(kb_rd));
  local_buffer #(.WIDTH(ROW_W), .DEPTH(N_MAX), .NR(G), .NW(1), .SEGS(TILES)) u_vbuf (
    .clk, .we(vb_we), .waddr(kv_wa), .wseg(kv_ws), .wdata(kv_wd), .raddr(vb_ra), .rdata(vb_rd));
  local_buffer #(.WIDTH(16), .DEPTH(IDX_DEPTH), .NR(2*G), .NW(1), .SEGS(1)) u_idxbuf (
    .clk, .we(ib_we), .waddr(ib_wa), .wseg(one[0:0]), .wdata(ib_wd), .raddr(ib_ra), .rdata(ib_rd));
  local_buffer #(.WIDTH(E_W), .DEPTH(NNZ_MAX), .NR(G), .NW(G), .SEGS(1)) u_sbuf (
    .clk, .we(sb_we), .waddr(sb_wa), .wseg(one), .wdata(sb_wd), .raddr(sb_ra), .rdata(sb_rd));
  local_buffer #(.WIDTH(OB_W), .DEPTH(N_MAX), .NR(1), .NW(G), .SEGS(1)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_wa), .wseg(one), .wdata(ob_wd), .raddr(ob_ra), .rdata(ob_rd));

  assign kb_ra[0] = j;
  assign ob_ra[0] = ob_row;
  assign ob_data  = ob_rd[0];

  // ---------------- address generation ----------------
  logic                     act   [G];
  logic [ROW_W-1:0]         a_row [G];
  logic [D*B_W-1:0]         b_row [G];
  logic signed [ACC_W-1:0]  dot   [G];
  logic [D*ACC_W-1:0]       acc   [G];
  logic [E_W-1:0]           e     [G];
  logic signed [DATA_W-1:0] score [G];
  logic                     stall, mac_en, mac_clr, last_i;
  logic [15:0]              rp0 [G], rp1 [G];

  assign intra_mode = (st == S_SPCLR) || (st == S_SP) || (st == S_WB);
  assign mac_en  = (st == S_SPCLR) || (st == S_SP);
  assign mac_clr = (st == S_SPCLR);
  assign last_i  = (32'(i) + G >= 32'(n_tok));
  assign stall   = (st == S_SD) && q_stall;

  // index buffer addresses depend only on sequencer state
  always_comb begin
    for (int g = 0; g < 2*G; g++) ib_ra[g] = '0;
    for (int g = 0; g < G; g++) begin
      unique case (st)
        S_COL: begin
          ib_ra[0] = IAW'(COLPTR_BASE + 32'(j));
          ib_ra[1] = IAW'(COLPTR_BASE + 32'(j) + 1);
        end
        S_SD:    ib_ra[g] = IAW'(ROWIDX_BASE + 32'(p) + g);
        S_SPCLR: begin
          ib_ra[g]   = IAW'(ROWPTR_BASE + 32'(i) + g);
          ib_ra[G+g] = IAW'(ROWPTR_BASE + 32'(i) + g + 1);
        end
        S_SP: begin
          ib_ra[g]   = IAW'(CSRCOL_BASE + 32'(rs[g]) + 32'(k));
          ib_ra[G+g] = IAW'(CSRPOS_BASE + 32'(rs[g]) + 32'(k));
        end
        default: ;
      endcase
    end
  end

  // V and S rows of the current row-view entries (used in S_SP)
  always_comb begin
    for (int g = 0; g < G; g++) begin
      vb_ra[g] = TOK_W'(ib_rd[g]);
      q_row[g] = TOK_W'(ib_rd[g]);
      sb_ra[g] = PW'(ib_rd[G+g]);
    end
  end

  always_comb begin
    for (int g = 0; g < G; g++) begin
      act[g]   = 1'b0;
      q_req[g] = 1'b0;
      rp0[g]   = '0;
      rp1[g]   = '0;
      unique case (st)
        S_SD: begin
          act[g]   = (32'(p) + g) < 32'(pend);
          q_req[g] = act[g];
        end
        S_SPCLR: begin
          act[g]     = (32'(i) + g) < 32'(n_tok);
          rp0[g]     = ib_rd[g];
          rp1[g]     = ib_rd[G+g];
        end
        S_SP: begin
          act[g]     = k < cnt[g];
        end
        S_WB: act[g] = (32'(i) + g) < 32'(n_tok);
        default: ;
      endcase
      for (int f = 0; f < D; f++) begin
        if (st == S_SD) begin
          a_row[g][f*DATA_W +: DATA_W] = q_data[g][f*DATA_W +: DATA_W];
          b_row[g][f*B_W +: B_W]       = B_W'($signed(k_reg[f*DATA_W +: DATA_W]));
        end else begin
          a_row[g][f*DATA_W +: DATA_W] = vb_rd[g][f*DATA_W +: DATA_W];
          b_row[g][f*B_W +: B_W]       = (st == S_SP && act[g]) ? {1'b0, sb_rd[g]} : '0;
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

  // ---------------- S write stage, row sums ----------------
  logic             wb_v [G];
  logic [PW-1:0]    wb_a [G];
  logic [E_W-1:0]   wb_e [G];
  logic [ACC_W-1:0] rsum [G];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < G; g++) begin
        wb_v[g] <= 1'b0; wb_a[g] <= '0; wb_e[g] <= '0; rsum[g] <= '0;
        rs[g] <= '0; cnt[g] <= '0;
      end
    end else begin
      for (int g = 0; g < G; g++) begin
        wb_v[g] <= (st == S_SD) && !stall && act[g];
        wb_a[g] <= PW'(32'(p) + g);
        wb_e[g] <= e[g];
        if (st == S_SPCLR) begin
          rsum[g] <= '0;
          rs[g]   <= rp0[g];
          cnt[g]  <= act[g] ? rp1[g] - rp0[g] : '0;
        end else if (st == S_SP && act[g]) begin
          rsum[g] <= rsum[g] + ACC_W'(sb_rd[g]);
        end
      end
    end
  end

  always_comb begin
    for (int g = 0; g < G; g++) begin
      sb_we[g] = wb_v[g];
      sb_wa[g] = wb_a[g];
      sb_wd[g] = wb_e[g];
      ob_we[g] = (st == S_WB) && act[g];
      ob_wa[g] = TOK_W'(32'(i) + g);
      ob_wd[g] = {rsum[g], acc[g]};
    end
  end

  // longest row of the current G rows
  logic [15:0] maxc;
  always_comb begin
    maxc = '0;
    for (int g = 0; g < G; g++)
      if (act[g] && (rp1[g] - rp0[g] > maxc)) maxc = rp1[g] - rp0[g];
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; i <= '0; j <= '0; p <= '0; pend <= '0; k <= '0; maxcnt <= '0;
      k_reg <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          i <= '0;
          j <= ngt;
          st <= (ngt < n_tok) ? S_COL : S_DRAIN;
        end
        S_COL: begin
          k_reg <= kb_rd[0];
          p     <= ib_rd[0];
          pend  <= ib_rd[1];
          if (ib_rd[0] < ib_rd[1]) st <= S_SD;
          else if (32'(j) + 1 >= 32'(n_tok)) st <= S_DRAIN;
          else j <= j + 1'b1;
        end
        S_SD: if (!stall) begin
          if (32'(p) + G >= 32'(pend)) begin
            if (32'(j) + 1 >= 32'(n_tok)) st <= S_DRAIN;
            else begin j <= j + 1'b1; st <= S_COL; end
          end else p <= p + 16'(G);
        end
        S_DRAIN: begin i <= '0; st <= S_SPCLR; end
        S_SPCLR: begin
          k      <= '0;
          maxcnt <= maxc;
          st     <= (maxc == 0) ? S_WB : S_SP;
        end
        S_SP: begin
          if (k + 1 >= maxcnt) st <= S_WB;
          else k <= k + 1'b1;
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
