// tb_denser_engine: runs the denser engine alone on random Q/K/V rows.
// Run 1 has every Q row loaded before start: the output buffer must hold
// sum_j exp(q_i.k_j) * v_j and sum_j exp(q_i.k_j) for j < ngt (reference
// exponential computed independently with real arithmetic for its 2^x table)
// and the run must take exactly ngt*(1+R) + 1 + R*(ngt+2) + 1 cycles,
// R = ceil(n/G). Run 2 starts before Q is loaded: the engine must stall,
// then produce the same kind of results. The forwarding read port is checked too.
module tb_denser_engine;
  import vitcod_pkg::*;
  localparam int G = 4, NG = 64, OB_W = D*ACC_W + ACC_W;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [TOK_W-1:0] n_tok, ngt; logic [4:0] score_shift = 6;
  logic start = 0, busy, done, q_clr = 0, ld_we = 0;
  ld_kind_e ld_kind = LD_K; logic [TOK_W-1:0] ld_row = 0; logic [2:0] ld_tile = 0;
  logic [TILE_W-1:0] ld_data = 0; logic [N_MAX-1:0] q_present;
  logic [TOK_W-1:0] fwd_row [1]; logic [ROW_W-1:0] fwd_data [1];
  logic [TOK_W-1:0] ob_row = 0; logic [OB_W-1:0] ob_data; logic intra_mode; logic [31:0] stall_cycles;
  int checks = 0, failures = 0;
  int q [N_MAX][D], k [N_MAX][D], v [N_MAX][D];
  int n, ng;

  denser_engine #(.G(G), .GS(1), .NGT_MAX(NG)) dut (.*);

  function automatic int sat(longint x); return (x > 127) ? 127 : (x < -128) ? -128 : int'(x); endfunction
  function automatic int ref_exp(longint dot, int sh);
    int sc, t4, ip, fr; longint lut, w;
    sc = sat(dot >>> sh); t4 = (sc * 369) >>> 8; ip = t4 >>> 4; fr = t4 & 15;
    lut = longint'($rtoi(1024.0 * (2.0 ** (real'(fr) / 16.0)) + 0.5));
    w = (ip >= 0) ? (lut << ip) : (lut >> (-ip));
    return (w > 65535) ? 65535 : int'(w);
  endfunction

  task automatic ld(ld_kind_e kd, int t, int arr [N_MAX][D]);
    for (int ft = 0; ft < TILES; ft++) begin
      @(negedge clk); ld_we = 1; ld_kind = kd; ld_row = TOK_W'(t); ld_tile = 3'(ft);
      for (int m = 0; m < MACS; m++) ld_data[m*8 +: 8] = 8'(arr[t][ft*8+m]);
    end
    @(negedge clk); ld_we = 0;
  endtask

  task automatic check_out();
    for (int i = 0; i < n; i++) begin
      longint den, num [D];
      den = 0; for (int f = 0; f < D; f++) num[f] = 0;
      for (int j = 0; j < ng; j++) begin
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
  endtask

  int cyc;
  always @(posedge clk) if (busy) cyc++;

  initial begin
    n = 30; ng = 7; n_tok = TOK_W'(n); ngt = TOK_W'(ng); fwd_row[0] = 0;
    for (int t = 0; t < n; t++) for (int f = 0; f < D; f++) begin
      q[t][f] = int'($urandom % 41) - 20; k[t][f] = int'($urandom % 41) - 20; v[t][f] = int'($urandom % 201) - 100;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); q_clr = 1; @(negedge clk); q_clr = 0;
    for (int t = 0; t < ng; t++) begin ld(LD_K, t, k); ld(LD_V, t, v); end
    for (int t = 0; t < n; t++) ld(LD_Q, t, q);
    for (int t = 0; t < n; t += 7) begin
      fwd_row[0] = TOK_W'(t); #0.1;
      for (int f = 0; f < D; f++) begin checks++; if (int'($signed(fwd_data[0][f*8 +: 8])) != q[t][f]) failures++; end
    end
    cyc = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    begin
      int r, expc; r = (n + G - 1) / G; expc = ng*(1+r) + 1 + r*(ng+2) + 1;
      checks++; if (cyc != expc) begin failures++; $display("cycles %0d expected %0d", cyc, expc); end
      checks++; if (stall_cycles != 0) failures++;
    end
    check_out();
    // run 2: Q arrives after start
    for (int t = 0; t < n; t++) for (int f = 0; f < D; f++) q[t][f] = int'($urandom % 41) - 20;
    @(negedge clk); q_clr = 1; @(negedge clk); q_clr = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < n; t++) ld(LD_Q, t, q);
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++; if (stall_cycles == 0) failures++;
    check_out();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
