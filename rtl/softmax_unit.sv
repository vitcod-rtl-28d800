// softmax_unit: exponential operator of the ViTCoD SoftMax unit.
//
// The engines apply the softmax exponential as soon as a complete attention
// score leaves the MAC lines (the paper follows Sanger here); normalisation is
// deferred to softmax_normalizer, which divides the S.V result by the row sum
// of the exponentials. This unit is purely combinational:
//   score = sat8(dot >>> shift)        signed, 4 fractional bits
//   t     = score * 369                369/256 ~ log2(e), 12 fractional bits
//   e     = 2^(t/4096) = LUT[frac] << int  (LUT[k] = round(1024 * 2^(k/16)))
// e is unsigned with 10 fractional bits and saturates at 16 bits. No running
// maximum is subtracted: the shift chosen per layer keeps scores in range.
// Everything past "an exponential operator" is this design's choice.
module softmax_unit
  import vitcod_pkg::*;
(
  input  logic signed [ACC_W-1:0] dot,
  input  logic [4:0]              shift,
  output logic signed [DATA_W-1:0] score,
  output logic [E_W-1:0]          e
);
  localparam logic [10:0] EXP2_LUT [16] = '{
    11'd1024, 11'd1069, 11'd1117, 11'd1166, 11'd1218, 11'd1272, 11'd1328, 11'd1387,
    11'd1448, 11'd1512, 11'd1579, 11'd1649, 11'd1722, 11'd1798, 11'd1878, 11'd1961};

  logic signed [ACC_W-1:0] shifted;
  logic signed [17:0]      t;
  logic signed [13:0]      t4;      // t with 4 fractional bits
  logic signed [9:0]       ipart;
  logic [3:0]              fpart;
  logic [31:0]             wide;

  always_comb begin
    shifted = dot >>> shift;
    score   = sat8({shifted[ACC_W-1], shifted});
    t       = 18'(score) * 18'sd369;
    t4      = 14'(t >>> 8);
    ipart   = 10'(t4 >>> 4);
    fpart   = t4[3:0];
    if (ipart >= 0) wide = 32'(EXP2_LUT[fpart]) << ipart;
    else            wide = 32'(EXP2_LUT[fpart]) >> (-ipart);
    e = (wide > 32'hFFFF) ? 16'hFFFF : wide[E_W-1:0];
  end
endmodule
