// tb_act_loader: streams K, V and Q beats with random gaps into the loader
// and checks every write it produces: the row/tile/kind order, routing of
// K/V rows to the denser engine when the token is below ngt and to the
// sparser engine otherwise, Q always to the denser engine, the decoded
// values for Q/K (reference: sat8((sum_c w[head][c]*x[c]) >>> 6)) and the
// raw low 64 bits for V, plus the kv_done and done flags.
module tb_act_loader;
  import vitcod_pkg::*;
  localparam int IN_W = C_HEADS * TILE_W, WA = $clog2(C_HEADS * H_HEADS);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0; logic [TOK_W-1:0] n_tok, ngt; logic [2:0] head;
  logic dw_we = 0; logic [WA-1:0] dw_addr = 0; logic signed [DATA_W-1:0] dw_data = 0;
  logic in_valid = 0, in_ready; logic [IN_W-1:0] in_data = 0;
  logic ld_we_d, ld_we_s; ld_kind_e ld_kind; logic [TOK_W-1:0] ld_row; logic [2:0] ld_tile;
  logic [TILE_W-1:0] ld_data; logic kv_done, done;
  int checks = 0, failures = 0;
  int w [H_HEADS][C_HEADS];
  logic [IN_W-1:0] beats [$];
  int exp_kind [$], exp_row [$], exp_tile [$]; logic [TILE_W-1:0] exp_data [$];
  int n, ng, hd, nwr = 0;

  act_loader dut (.*);

  function automatic int sat(int x); return (x > 127) ? 127 : (x < -128) ? -128 : x; endfunction

  always @(posedge clk) if (rst_n && (ld_we_d || ld_we_s)) begin
    int kd, r, tl; logic [TILE_W-1:0] dd;
    nwr++;
    checks++;
    if (exp_kind.size() == 0) failures++;
    else begin
      kd = exp_kind.pop_front(); r = exp_row.pop_front(); tl = exp_tile.pop_front(); dd = exp_data.pop_front();
      checks++; if (int'(ld_kind) != kd || int'(ld_row) != r || int'(ld_tile) != tl) failures++;
      checks++; if (ld_data !== dd) failures++;
      checks++;
      if (kd == 2) begin if (!(ld_we_d && !ld_we_s)) failures++; end
      else if (r < ng) begin if (!(ld_we_d && !ld_we_s)) failures++; end
      else if (!(ld_we_s && !ld_we_d)) failures++;
    end
  end

  task automatic run(int nn, int g, int h);
    n = nn; ng = g; hd = h; n_tok = TOK_W'(nn); ngt = TOK_W'(g); head = 3'(h);
    for (int kd = 0; kd < 3; kd++) for (int t = 0; t < nn; t++) for (int ft = 0; ft < TILES; ft++) begin
      logic [IN_W-1:0] b; logic [TILE_W-1:0] e;
      for (int p = 0; p < IN_W / 32; p++) b[p*32 +: 32] = $urandom;
      for (int m = 0; m < MACS; m++) begin
        int s; s = 0;
        for (int c = 0; c < C_HEADS; c++) s += w[h][c] * int'($signed(b[(c*MACS+m)*8 +: 8]));
        e[m*8 +: 8] = 8'(sat(s >>> 6));
      end
      if (kd == 1) e = b[TILE_W-1:0];
      beats.push_back(b); exp_kind.push_back(kd); exp_row.push_back(t); exp_tile.push_back(ft); exp_data.push_back(e);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (beats.size() != 0) begin
      in_valid = ($urandom % 4) != 0; in_data = beats[0];
      @(posedge clk); if (in_valid && in_ready) void'(beats.pop_front());
      if (kv_done && exp_kind.size() > 0 && exp_kind[0] != 2) begin checks++; failures++; end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (!(kv_done && done)) failures++;
    checks++; if (exp_kind.size() != 0) failures++;
    checks++; if (in_ready) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int o = 0; o < H_HEADS; o++) for (int c = 0; c < C_HEADS; c++) begin
      w[o][c] = int'($urandom % 129) - 64;
      @(negedge clk); dw_we = 1; dw_addr = WA'(o*C_HEADS + c); dw_data = 8'(w[o][c]);
    end
    @(negedge clk); dw_we = 0;
    run(9, 3, 2);
    run(5, 0, 5);
    run(4, 4, 0);
    checks++; if (nwr != 3*8*(9+5+4)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
