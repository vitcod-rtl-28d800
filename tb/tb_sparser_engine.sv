// tb_sparser_engine: runs the sparser engine alone. A random mask (diagonal
// band, random extra non-zeros, one empty column) over the columns j >= ngt
// is written into the index buffer as CSC plus row view. Q rows are served by
// the testbench on the forwarding interface with random stalls. Every output
// buffer row must hold sum exp(q_i.k_j) * v_j and sum exp(q_i.k_j) over the
// row's non-zeros (reference exponential from real arithmetic); rows without
// non-zeros must be zero.
module tb_sparser_engine;
  import vitcod_pkg::*;
  localparam int G = 4, OB_W = D*ACC_W + ACC_W;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [TOK_W-1:0] n_tok, ngt; logic [4:0] score_shift = 6;
  logic start = 0, busy, done, ld_we = 0;
  ld_kind_e ld_kind = LD_K; logic [TOK_W-1:0] ld_row = 0; logic [2:0] ld_tile = 0;
  logic [TILE_W-1:0] ld_data = 0;
  logic idx_we = 0; logic [13:0] idx_addr = 0; logic [15:0] idx_data = 0;
  logic q_req [G]; logic [TOK_W-1:0] q_row [G]; logic [ROW_W-1:0] q_data [G]; logic q_stall;
  logic [TOK_W-1:0] ob_row = 0; logic [OB_W-1:0] ob_data; logic intra_mode;
  int checks = 0, failures = 0, nstall = 0;
  int q [N_MAX][D], k [N_MAX][D], v [N_MAX][D];
  bit msk [N_MAX][N_MAX];
  int n, ng;

  sparser_engine #(.G(G)) dut (.*);

  function automatic int sat(longint x); return (x > 127) ? 127 : (x < -128) ? -128 : int'(x); endfunction
  function automatic int ref_exp(longint dot, int sh);
    int sc, t4, ip, fr; longint lut, w;
    sc = sat(dot >>> sh); t4 = (sc * 369) >>> 8; ip = t4 >>> 4; fr = t4 & 15;
    lut = longint'($rtoi(1024.0 * (2.0 ** (real'(fr) / 16.0)) + 0.5));
    w = (ip >= 0) ? (lut << ip) : (lut >> (-ip));
    return (w > 65535) ? 65535 : int'(w);
  endfunction

  // forwarding model: rows are always present, stalls are random
  logic stall_r = 0;
  always @(negedge clk) stall_r <= ($urandom % 3) == 0;
  always_comb begin
    q_stall = 1'b0;
    for (int g = 0; g < G; g++) begin
      for (int f = 0; f < D; f++) q_data[g][f*8 +: 8] = 8'(q[q_row[g] % N_MAX][f]);
      if (q_req[g] && stall_r) q_stall = 1'b1;
    end
  end
  always @(posedge clk) if (q_stall) nstall++;

  task automatic wr_idx(int a, int d);
    @(negedge clk); idx_we = 1; idx_addr = 14'(a); idx_data = 16'(d);
    @(negedge clk); idx_we = 0;
  endtask

  task automatic ld(ld_kind_e kd, int t, int arr [N_MAX][D]);
    for (int ft = 0; ft < TILES; ft++) begin
      @(negedge clk); ld_we = 1; ld_kind = kd; ld_row = TOK_W'(t); ld_tile = 3'(ft);
      for (int m = 0; m < MACS; m++) ld_data[m*8 +: 8] = 8'(arr[t][ft*8+m]);
    end
    @(negedge clk); ld_we = 0;
  endtask

  initial begin
    int pos, cp; int posof [N_MAX][N_MAX];
    n = 33; ng = 6; n_tok = TOK_W'(n); ngt = TOK_W'(ng);
    for (int t = 0; t < n; t++) for (int f = 0; f < D; f++) begin
      q[t][f] = int'($urandom % 41) - 20; k[t][f] = int'($urandom % 41) - 20; v[t][f] = int'($urandom % 201) - 100;
    end
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++)
      msk[i][j] = (j >= ng) && (j != 20) && (((i - j) <= 1 && (j - i) <= 1) || ($urandom % 100 < 8));
    repeat (2) @(negedge clk); rst_n = 1;
    pos = 0;
    for (int j = 0; j <= n; j++) begin
      wr_idx(COLPTR_BASE + j, pos);
      if (j < n) for (int i = 0; i < n; i++) if (msk[i][j]) begin
        posof[i][j] = pos; wr_idx(ROWIDX_BASE + pos, i); pos++;
      end
    end
    cp = 0;
    for (int i = 0; i <= n; i++) begin
      wr_idx(ROWPTR_BASE + i, cp);
      if (i < n) for (int j = 0; j < n; j++) if (msk[i][j]) begin
        wr_idx(CSRCOL_BASE + cp, j); wr_idx(CSRPOS_BASE + cp, posof[i][j]); cp++;
      end
    end
    for (int t = ng; t < n; t++) begin ld(LD_K, t, k); ld(LD_V, t, v); end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      longint den, num [D];
      den = 0; for (int f = 0; f < D; f++) num[f] = 0;
      for (int j = 0; j < n; j++) if (msk[i][j]) begin
        longint dt; int e; dt = 0;
        for (int f = 0; f < D; f++) dt += q[i][f] * k[j][f];
        e = ref_exp(dt, 6); den += e;
        for (int f = 0; f < D; f++) num[f] += longint'(e) * v[j][f];
      end
      ob_row = TOK_W'(i); #0.1;
      checks++; if (ob_data[D*ACC_W +: ACC_W] !== 32'(den)) failures++;
      for (int f = 0; f < D; f++) begin
        checks++; if (ob_data[f*ACC_W +: ACC_W] !== 32'(num[f])) failures++;
      end
    end
    checks++; if (nstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
