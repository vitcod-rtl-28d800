// tb_softmax_normalizer: serves random output-buffer rows for both engines
// (numerators kept within +-160 times the denominator, some rows with a zero
// denominator) and checks every streamed tile against
// act(sat8((acc_d + acc_s) / (sum_d + sum_s))) under random out_ready, for
// each activation mode, plus the tile order and the done pulse.
module tb_softmax_normalizer;
  import vitcod_pkg::*;
  localparam int OB_W = D*ACC_W + ACC_W;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0; logic [TOK_W-1:0] n_tok; logic [1:0] act_mode;
  logic [TOK_W-1:0] ob_row; logic [OB_W-1:0] ob_d, ob_s;
  logic out_valid, out_ready = 0; logic [TOK_W-1:0] out_row; logic [2:0] out_tile;
  logic [TILE_W-1:0] out_data; logic done;
  int checks = 0, failures = 0, ndone = 0;
  longint ad [N_MAX][D], as_ [N_MAX][D], sd [N_MAX], ss [N_MAX];
  int n;

  softmax_normalizer dut (.*);

  always_comb begin
    ob_d[D*ACC_W +: ACC_W] = 32'(sd[ob_row % N_MAX]); ob_s[D*ACC_W +: ACC_W] = 32'(ss[ob_row % N_MAX]);
    for (int f = 0; f < D; f++) begin
      ob_d[f*ACC_W +: ACC_W] = 32'(ad[ob_row % N_MAX][f]); ob_s[f*ACC_W +: ACC_W] = 32'(as_[ob_row % N_MAX][f]);
    end
  end

  localparam int LUT [16] = '{0,2,2,3,3,2,2,1,1,0,0,0,0,0,0,0};
  function automatic int act(int x, int mode);
    int mag, r;
    if (mode == 1) return (x > 0) ? x : 0;
    if (mode == 2) begin
      mag = (x < 0) ? -x : x; r = (x > 0) ? x : 0;
      return r - LUT[(mag > 63) ? 15 : (mag >> 2)];
    end
    return x;
  endfunction

  always @(posedge clk) if (done) ndone++;

  task automatic run(int nn, int mode);
    int ei, et;
    n = nn; n_tok = TOK_W'(nn); act_mode = 2'(mode);
    for (int i = 0; i < nn; i++) begin
      sd[i] = ($urandom % 5 == 0) ? 0 : longint'($urandom % 70000);
      ss[i] = ($urandom % 5 == 0) ? 0 : longint'($urandom % 70000);
      if (i == 2) begin sd[i] = 0; ss[i] = 0; end
      for (int f = 0; f < D; f++) begin
        ad[i][f] = longint'($urandom % 321) - 160; ad[i][f] *= sd[i];
        as_[i][f] = longint'($urandom % 321) - 160; as_[i][f] *= ss[i];
      end
    end
    ndone = 0; ei = 0; et = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (ei < nn) begin
      out_ready = ($urandom % 3) != 0;
      #0.1;
      if (out_valid && out_ready) begin
        checks++; if (int'(out_row) != ei || int'(out_tile) != et) failures++;
        for (int m = 0; m < MACS; m++) begin
          longint num, den, qq; int e;
          num = ad[ei][et*8+m] + as_[ei][et*8+m]; den = sd[ei] + ss[ei];
          qq = (den == 0) ? 0 : num / den;
          e = act((qq > 127) ? 127 : (qq < -128) ? -128 : int'(qq), mode);
          checks++; if (int'($signed(out_data[m*8 +: 8])) != e) failures++;
        end
        et++; if (et == TILES) begin et = 0; ei++; end
      end
      @(negedge clk);
    end
    out_ready = 0;
    repeat (3) @(negedge clk);
    checks++; if (ndone != 1 || out_valid) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(12, 0); run(7, 1); run(9, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
