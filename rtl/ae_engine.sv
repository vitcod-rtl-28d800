// ae_engine: encoder or decoder engine of the ViTCoD auto-encoder.
//
// The auto-encoder compresses Q/K along the head dimension: for every token
// and feature, the vector of IN_H head values is multiplied by a small learned
// OUT_H x IN_H matrix (6 -> 3 heads to encode, 3 -> 6 to decode in the
// paper's example). The weights are loaded once through w_we/w_addr/w_data
// (index o*IN_H + i) and stay on chip. LANES features are processed per cycle,
// one beat per cycle, with one register stage: out_* follow in_* by one clock.
// out = sat8((sum_i w[o][i] * x[i]) >>> SHIFT), i.e. weights carry SHIFT
// fractional bits. The matrix shape and the pipelining follow the paper; the
// number format, lane count per beat and rounding are this design's own.
module ae_engine
  import vitcod_pkg::*;
#(
  parameter int unsigned IN_H  = 6,
  parameter int unsigned OUT_H = 3,
  parameter int unsigned LANES = MACS,
  parameter int unsigned SHIFT = 6,
  localparam int unsigned WA   = $clog2(IN_H * OUT_H)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [WA-1:0]            w_addr,
  input  logic signed [DATA_W-1:0] w_data,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] in_vec  [IN_H][LANES],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_vec [OUT_H][LANES]
);
  logic signed [DATA_W-1:0] w [OUT_H * IN_H];
  logic signed [ACC_W-1:0]  sum [OUT_H][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < OUT_H * IN_H; k++) w[k] <= '0;
    end else if (w_we && (32'(w_addr) < OUT_H * IN_H)) begin
      w[w_addr] <= w_data;
    end
  end

  always_comb begin
    for (int o = 0; o < OUT_H; o++) begin
      for (int l = 0; l < LANES; l++) begin
        sum[o][l] = '0;
        for (int i = 0; i < IN_H; i++) sum[o][l] += ACC_W'(w[o*IN_H+i] * in_vec[i][l]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < OUT_H; o++)
        for (int l = 0; l < LANES; l++) out_vec[o][l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int o = 0; o < OUT_H; o++)
          for (int l = 0; l < LANES; l++)
            out_vec[o][l] <= sat8($signed({sum[o][l][ACC_W-1], sum[o][l]}) >>> SHIFT);
      end
    end
  end
endmodule
