// softmax_normalizer: final softmax division and output path of ViTCoD.
//
// Both engines leave, for every query row i, the un-normalised products
// sum_j exp(s_ij) * V[j] over their own columns and the matching sum of
// exp(s_ij), in separate output buffers. This unit adds the two halves and
// divides: out[i][f] = (acc_d[f] + acc_s[f]) / (sum_d + sum_s), truncated
// toward zero and saturated to int8, which equals softmax(S).V over the
// non-pruned positions. The activation unit then applies the selected
// non-linearity. One 8-feature tile leaves per cycle when out_ready is high:
// rows 0..n_tok-1, tiles 0..7. done pulses after the last tile.
// Deferring the division to the end is this design's choice; the paper only
// says a SoftMax unit with an exponential operator follows the scores.
module softmax_normalizer
  import vitcod_pkg::*;
#(
  localparam int unsigned OB_W = D * ACC_W + ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [TOK_W-1:0]  n_tok,
  input  logic [1:0]        act_mode,
  output logic [TOK_W-1:0]  ob_row,
  input  logic [OB_W-1:0]   ob_d,
  input  logic [OB_W-1:0]   ob_s,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [TOK_W-1:0]  out_row,
  output logic [2:0]        out_tile,
  output logic [TILE_W-1:0] out_data,
  output logic              done
);
  logic             run;
  logic [TOK_W-1:0] i;
  logic [2:0]       ft;
  logic signed [ACC_W+1:0] den, num [MACS];
  logic signed [ACC_W+1:0] quo [MACS];
  logic signed [DATA_W-1:0] q8 [MACS], y [MACS];

  assign ob_row    = i;
  assign out_row   = i;
  assign out_tile  = ft;
  assign out_valid = run;

  always_comb begin
    den = (ACC_W+2)'(ob_d[D*ACC_W +: ACC_W]) + (ACC_W+2)'(ob_s[D*ACC_W +: ACC_W]);
    for (int m = 0; m < MACS; m++) begin
      num[m] = (ACC_W+2)'($signed(ob_d[(32'(ft)*MACS+m)*ACC_W +: ACC_W]))
             + (ACC_W+2)'($signed(ob_s[(32'(ft)*MACS+m)*ACC_W +: ACC_W]));
      if (den == 0) quo[m] = '0;
      else          quo[m] = num[m] / den;
      q8[m]  = sat8(quo[m][ACC_W:0]);
      out_data[m*DATA_W +: DATA_W] = y[m];
    end
  end

  for (genvar m = 0; m < MACS; m++) begin : g_act
    activation_unit u_act (.mode(act_mode), .x(q8[m]), .y(y[m]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; i <= '0; ft <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= (n_tok != 0); i <= '0; ft <= '0;
        done <= (n_tok == 0);
      end else if (run && out_ready) begin
        ft <= ft + 1'b1;
        if (ft == 3'(TILES-1)) begin
          ft <= '0;
          if (32'(i) + 1 >= 32'(n_tok)) begin run <= 1'b0; done <= 1'b1; end
          else i <= i + 1'b1;
        end
      end
    end
  end
endmodule
