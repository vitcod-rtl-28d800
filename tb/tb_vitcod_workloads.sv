// tb_vitcod_workloads: attention heads shaped like the evaluated models, run
// through the whole accelerator at its default size.
//
//   1. DeiT (Base/Small/Tiny share the per-head shape): 197 tokens,
//      64 features, 90 % of the attention map pruned, 8 global tokens.
//   2. LeViT first stage: 196 tokens, 80 % pruned, 24 global tokens (the
//      fewest that keep the sparse part within the 3281-entry index buffer).
//   3. LeViT second stage: 49 tokens, 80 % pruned, 4 global tokens, GELU.
// The global columns are dense; the rest of each mask is a diagonal band
// plus random non-zeros whose rate is set so that the whole map reaches the
// target sparsity. Data, reference model and the exact output comparison
// are the same as in tb_vitcod_top. Each head also checks that the achieved
// sparsity is within one point of the target and prints its cycle counts.
// Token counts for DeiT and the sparsity levels follow the evaluated setup;
// the LeViT token counts (14x14 and 7x7 grids) and the global-token counts
// are this test's own choices.
module tb_vitcod_workloads;
  import vitcod_pkg::*;

  localparam int NMX = N_MAX;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  cfg_t cfg;
  logic start = 0, busy, done;
  logic idx_we = 0; logic [13:0] idx_addr = 0; logic [15:0] idx_data = 0;
  logic dw_we = 0, ew_we = 0; logic [4:0] dw_addr = 0, ew_addr = 0;
  logic signed [7:0] dw_data = 0, ew_data = 0;
  logic in_valid = 0, in_ready; logic [C_HEADS*TILE_W-1:0] in_data = '0;
  logic out_valid, out_ready = 0; logic [TOK_W-1:0] out_row; logic [2:0] out_tile;
  logic [TILE_W-1:0] out_data;
  logic enc_in_valid = 0; logic [H_HEADS*TILE_W-1:0] enc_in_data = '0;
  logic enc_out_valid; logic [C_HEADS*TILE_W-1:0] enc_out_data;
  logic [31:0] cyc_total, cyc_run, fwd_hits, fwd_stalls, dense_q_stalls;
  logic dense_intra, sparse_intra;

  vitcod_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- test data ----------------
  int qc [C_HEADS][NMX][D];
  int kc [C_HEADS][NMX][D];
  int vv [NMX][D];
  int wd [H_HEADS][C_HEADS];
  int we [C_HEADS][H_HEADS];
  int q [NMX][D], k [NMX][D];
  bit msk [NMX][NMX];
  int expect_o [NMX][D];
  int got [NMX][D];
  bit gotv [NMX][TILES];
  int n, ngt, shift, head, amode;
  int n_emptycol, n_emptyrow, pmil, spars;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int sat(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  function automatic int ref_exp(longint dot, int sh);
    longint s; int sc, t, t4, ip, fr; longint lut, w;
    s  = dot >>> sh;
    sc = sat(s);
    t  = sc * 369;
    t4 = t >>> 8;
    ip = t4 >>> 4;
    fr = t4 & 15;
    lut = longint'($rtoi(1024.0 * (2.0 ** (real'(fr) / 16.0)) + 0.5));
    w = (ip >= 0) ? (lut << ip) : (lut >> (-ip));
    return (w > 65535) ? 65535 : int'(w);
  endfunction

  function automatic int ref_act(int x, int mode);
    real a, c; int cr, relu, idx;
    relu = (x < 0) ? 0 : x;
    if (mode == 1) return relu;
    if (mode != 2) return x;
    idx = (x < 0 ? -x : x) >> 2;
    if (idx > 15) idx = 15;
    a = real'(idx) / 4.0;
    // a * Phi(-a), Phi from the tanh form of the normal CDF
    c = a * 0.5 * (1.0 + $tanh(0.7978845608 * (-a - 0.044715 * a * a * a)));
    cr = $rtoi(16.0 * c + 0.5);
    return relu - cr;
  endfunction

  task automatic make_head(int nn, int ng, int md, int sp);
    n = nn; ngt = ng; amode = md; shift = 6; head = rnd(0, H_HEADS-1);
    for (int c = 0; c < C_HEADS; c++)
      for (int t = 0; t < n; t++)
        for (int f = 0; f < D; f++) begin qc[c][t][f] = rnd(-20, 20); kc[c][t][f] = rnd(-20, 20); end
    for (int t = 0; t < n; t++) for (int f = 0; f < D; f++) vv[t][f] = rnd(-100, 100);
    for (int h = 0; h < H_HEADS; h++) for (int c = 0; c < C_HEADS; c++) wd[h][c] = rnd(-40, 40);
    for (int t = 0; t < n; t++)
      for (int f = 0; f < D; f++) begin
        longint sq = 0, sk = 0;
        for (int c = 0; c < C_HEADS; c++) begin
          sq += wd[head][c] * qc[c][t][f];
          sk += wd[head][c] * kc[c][t][f];
        end
        q[t][f] = sat(sq >>> 6);
        k[t][f] = sat(sk >>> 6);
      end
    n_emptycol = 0; n_emptyrow = 0;
    begin
      // random rate (1/10000) of the sparse part that gives the target sparsity
      int target, band;
      target = (n * n * (100 - sp)) / 100;
      band   = 3 * (n - ngt);
      pmil   = ((target - n * ngt - band) * 10000) / (n * (n - ngt));
      if (pmil < 0) pmil = 0;
    end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (j < ngt) msk[i][j] = 1;
        else msk[i][j] = (i - j <= 1 && j - i <= 1) || (($urandom % 10000) < pmil);
      end
    for (int j = ngt; j < n; j++) begin
      bit any = 0;
      for (int i = 0; i < n; i++) any |= msk[i][j];
      if (!any) n_emptycol++;
    end
    for (int i = 0; i < n; i++) begin
      bit any = 0;
      for (int j = ngt; j < n; j++) any |= msk[i][j];
      if (!any) n_emptyrow++;
    end
    // reference
    for (int i = 0; i < n; i++) begin
      longint num [D]; longint den = 0;
      for (int f = 0; f < D; f++) num[f] = 0;
      for (int j = 0; j < n; j++) if (msk[i][j]) begin
        longint dt = 0; int e;
        for (int f = 0; f < D; f++) dt += q[i][f] * k[j][f];
        e = ref_exp(dt, shift);
        den += e;
        for (int f = 0; f < D; f++) num[f] += longint'(e) * vv[j][f];
      end
      for (int f = 0; f < D; f++)
        expect_o[i][f] = ref_act(sat((den == 0) ? 0 : num[f] / den), amode);
    end
  endtask

  task automatic wr_idx(int a, int d);
    @(negedge clk); idx_we = 1; idx_addr = 14'(a); idx_data = 16'(d);
    @(negedge clk); idx_we = 0;
  endtask

  task automatic load_tables();
    int pos, cp; int posof [NMX][NMX];
    // CSC over the sparse columns
    pos = 0;
    for (int j = 0; j <= n; j++) begin
      wr_idx(COLPTR_BASE + j, pos);
      if (j >= ngt && j < n)
        for (int i = 0; i < n; i++) if (msk[i][j]) begin
          posof[i][j] = pos; wr_idx(ROWIDX_BASE + pos, i); pos++;
        end
    end
    // row view of the same non-zeros
    cp = 0;
    for (int i = 0; i <= n; i++) begin
      wr_idx(ROWPTR_BASE + i, cp);
      if (i < n)
        for (int j = ngt; j < n; j++) if (msk[i][j]) begin
          wr_idx(CSRCOL_BASE + cp, j); wr_idx(CSRPOS_BASE + cp, posof[i][j]); cp++;
        end
    end
    for (int h = 0; h < H_HEADS; h++) for (int c = 0; c < C_HEADS; c++) begin
      @(negedge clk); dw_we = 1; dw_addr = 5'(h*C_HEADS + c); dw_data = 8'(wd[h][c]);
    end
    @(negedge clk); dw_we = 0;
  endtask

  task automatic send_beat(logic [C_HEADS*TILE_W-1:0] d);
    @(negedge clk);
    while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
    in_valid = 1; in_data = d;
    while (!in_ready) @(negedge clk);
  endtask

  task automatic stream_inputs();
    logic [C_HEADS*TILE_W-1:0] d;
    for (int kind = 0; kind < 3; kind++)
      for (int t = 0; t < n; t++)
        for (int ft = 0; ft < TILES; ft++) begin
          d = '0;
          for (int m = 0; m < MACS; m++) begin
            if (kind == 1) d[m*8 +: 8] = 8'(vv[t][ft*8+m]);
            else for (int c = 0; c < C_HEADS; c++)
              d[(c*MACS+m)*8 +: 8] = 8'((kind == 0) ? kc[c][t][ft*8+m] : qc[c][t][ft*8+m]);
          end
          send_beat(d);
        end
    @(negedge clk); in_valid = 0;
  endtask

  // ---------------- mechanism counters ----------------
  int n_modesw_d = 0, n_modesw_s = 0, n_backpressure = 0, tot_fwd_hits = 0, tot_fwd_stalls = 0;
  int tot_dq_stalls = 0, tot_emptycol = 0, tot_emptyrow = 0;
  logic di_q = 0, si_q = 0;
  always @(posedge clk) begin
    di_q <= dense_intra; si_q <= sparse_intra;
    if (dense_intra && !di_q) n_modesw_d++;
    if (sparse_intra && !si_q) n_modesw_s++;
    if (out_valid && !out_ready) n_backpressure++;
    out_ready <= ($urandom % 3) != 0;
  end
  always @(posedge clk) if (out_valid && out_ready) begin
    for (int m = 0; m < MACS; m++) got[out_row][out_tile*8+m] = int'($signed(out_data[m*8 +: 8]));
    gotv[out_row][out_tile] = 1;
  end

  task automatic run_head(int nn, int ng, int md, int sp);
    make_head(nn, ng, md, sp);
    begin
      int nz, nzs; nz = 0; nzs = 0;
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) if (msk[i][j]) begin nz++; if (j >= ngt) nzs++; end
      spars = 100 - (nz * 100 + n * n / 2) / (n * n);
      $display("head n=%0d: %0d non-zeros (%0d in sparse columns), sparsity %0d%%", n, nz, nzs, spars);
      checks++; if (spars < sp - 1 || spars > sp + 1) begin failures++; $display("sparsity off target"); end
      checks++; if (nzs > NNZ_MAX) begin failures++; $display("sparse part exceeds index buffer"); end
    end
    load_tables();
    for (int i = 0; i < n; i++) for (int t = 0; t < TILES; t++) gotv[i][t] = 0;
    cfg.n_tok = TOK_W'(n); cfg.ngt = TOK_W'(ngt); cfg.score_shift = 5'(shift);
    cfg.head = 3'(head); cfg.act_mode = 2'(amode);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    stream_inputs();
    while (!done) @(posedge clk);
    @(negedge clk);
    begin
      int bad = 0;
      for (int i = 0; i < n; i++) for (int f = 0; f < D; f++) begin
        checks++;
        if (!gotv[i][f/8] || got[i][f] !== expect_o[i][f]) begin
          failures++; bad++;
          if (bad < 6) $display("MISMATCH head n=%0d row %0d f %0d got %0d exp %0d", n, i, f, got[i][f], expect_o[i][f]);
        end
      end
      $display("head n=%0d ngt=%0d act=%0d: %0d cycles, %0d both-engine cycles, fwd hits %0d stalls %0d, dense Q stalls %0d, mismatches %0d",
               n, ngt, amode, cyc_total, cyc_run, fwd_hits, fwd_stalls, dense_q_stalls, bad);
    end
    tot_fwd_hits += fwd_hits; tot_fwd_stalls += fwd_stalls; tot_dq_stalls += dense_q_stalls;
    tot_emptycol += n_emptycol; tot_emptyrow += n_emptyrow;
  endtask

  task automatic check_encoder();
    int xin [H_HEADS][MACS];
    for (int c = 0; c < C_HEADS; c++) for (int h = 0; h < H_HEADS; h++) begin
      we[c][h] = rnd(-50, 50);
      @(negedge clk); ew_we = 1; ew_addr = 5'(c*H_HEADS + h); ew_data = 8'(we[c][h]);
    end
    @(negedge clk); ew_we = 0;
    repeat (5) begin
      for (int h = 0; h < H_HEADS; h++) for (int m = 0; m < MACS; m++) begin
        xin[h][m] = rnd(-128, 127); enc_in_data[(h*MACS+m)*8 +: 8] = 8'(xin[h][m]);
      end
      enc_in_valid = 1;
      @(negedge clk); enc_in_valid = 0;
      checks++;
      if (!enc_out_valid) failures++;
      for (int c = 0; c < C_HEADS; c++) for (int m = 0; m < MACS; m++) begin
        longint s = 0;
        for (int h = 0; h < H_HEADS; h++) s += we[c][h] * xin[h][m];
        checks++;
        if (int'($signed(enc_out_data[(c*MACS+m)*8 +: 8])) != sat(s >>> 6)) failures++;
      end
    end
  endtask

  task automatic need(string what, int cnt);
    checks++;
    $display("mechanism %-28s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("  never happened: %s", what); end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_head(197, 8, 0, 90);
    run_head(196, 24, 1, 80);
    run_head(49, 4, 2, 80);
    need("forwarding hits", tot_fwd_hits);
    need("denser inter->intra switch", n_modesw_d);
    need("sparser inter->intra switch", n_modesw_s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
