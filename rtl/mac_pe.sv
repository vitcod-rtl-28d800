// mac_pe: one MAC of a ViTCoD MAC line.
//
// A signed multiplier feeds a single adder. The adder's second operand is
// chosen as in the accelerator's PE drawing:
//   intra = 0  inter-PE accumulation: the partial sum arriving from the
//              previous MAC (used for Q.K^T, K-stationary dataflow);
//   intra = 1  intra-PE accumulation: the MAC's own accumulator register, or
//              constant 0 when clr is set (used for S.V, output stationary).
// psum_out = a*b + addend is combinational so that a line of MACs forms one
// ripple chain; acc is written at the clock edge when en is set in intra mode.
// The datapath structure follows the paper; widths are this design's choice.
module mac_pe #(
  parameter int unsigned A_W   = 8,
  parameter int unsigned B_W   = 17,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    intra,
  input  logic                    clr,
  input  logic signed [A_W-1:0]   a,
  input  logic signed [B_W-1:0]   b,
  input  logic signed [ACC_W-1:0] psum_in,
  output logic signed [ACC_W-1:0] psum_out,
  output logic signed [ACC_W-1:0] acc
);
  logic signed [A_W+B_W-1:0] prod;
  logic signed [ACC_W-1:0]   addend;

  always_comb begin
    prod = a * b;
    if (!intra)   addend = psum_in;
    else if (clr) addend = '0;
    else          addend = acc;
    psum_out = ACC_W'(prod) + addend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          acc <= '0;
    else if (en && intra) acc <= psum_out;
  end
endmodule
