// activation_unit: ViTCoD activation unit on the output path.
//
// mode 0 passes the value through, mode 1 is ReLU made by gating the value
// with its sign, mode 2 is GELU from a lookup table (the paper: gating for
// ReLU, lookup tables for other functions). The input and output are signed
// 8 bit with 4 fractional bits. GELU uses GELU(x) = ReLU(x) - c(|x|) with
// c(a) = a * Phi(-a), which is even in x; the 16-entry table holds
// round(16 * c(k/4)) for k = 0..15 and is indexed by |x| in steps of 0.25.
// Combinational. The table layout and fixed-point format are this design's own.
module activation_unit
  import vitcod_pkg::*;
(
  input  logic [1:0]               mode,
  input  logic signed [DATA_W-1:0] x,
  output logic signed [DATA_W-1:0] y
);
  localparam logic [1:0] GELU_CORR [16] = '{
    2'd0, 2'd2, 2'd2, 2'd3, 2'd3, 2'd2, 2'd2, 2'd1,
    2'd1, 2'd0, 2'd0, 2'd0, 2'd0, 2'd0, 2'd0, 2'd0};

  logic signed [DATA_W-1:0] relu;
  logic [DATA_W:0]          mag;
  logic [3:0]               idx;

  always_comb begin
    relu = x & {DATA_W{~x[DATA_W-1]}};
    mag  = x[DATA_W-1] ? (DATA_W+1)'(-$signed({x[DATA_W-1], x})) : (DATA_W+1)'(x);
    idx  = (mag > 9'd63) ? 4'd15 : mag[5:2];
    unique case (mode)
      2'd1:    y = relu;
      2'd2:    y = relu - DATA_W'(GELU_CORR[idx]);
      default: y = x;
    endcase
  end
endmodule
