// act_loader: off-chip load path of ViTCoD with the decoder engine.
//
// Q and K travel from off-chip memory in compressed form: for each token and
// 8-feature tile, one beat carries the C_HEADS compressed head values of
// those 8 features. The decoder engine (ae_engine, C_HEADS -> H_HEADS)
// recovers all heads in the same cycle stream, so decoding is pipelined with
// the transfer; the loader keeps the head being processed. V is not
// compressed and uses the low 64 bits of a beat. After one register stage
// each tile is routed, like the crossbar between the global buffer and the
// engines, by token index: K and V rows of global tokens (t < ngt) to the
// denser engine, the rest to the sparser engine; Q rows always to the denser
// engine, whose Q buffer the sparser engine reaches by forwarding.
// Beat order expected on the input: all K tiles (token-major, tile-minor),
// then all V tiles, then all Q tiles. in_ready is high from start until the
// last beat; kv_done rises when the last V tile is written, done when the last
// Q tile is written. One beat per cycle, no back-pressure inside.
// Compression and decode-while-loading follow the paper; the beat format and
// the K, V, Q order (so compute can start while Q is still arriving) are this
// design's own.
module act_loader
  import vitcod_pkg::*;
#(
  localparam int unsigned IN_W = C_HEADS * TILE_W,
  localparam int unsigned WA   = $clog2(C_HEADS * H_HEADS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [TOK_W-1:0]  n_tok,
  input  logic [TOK_W-1:0]  ngt,
  input  logic [2:0]        head,
  // decoder weight load
  input  logic              dw_we,
  input  logic [WA-1:0]     dw_addr,
  input  logic signed [DATA_W-1:0] dw_data,
  // off-chip stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IN_W-1:0]   in_data,
  // to the engines
  output logic              ld_we_d,
  output logic              ld_we_s,
  output ld_kind_e          ld_kind,
  output logic [TOK_W-1:0]  ld_row,
  output logic [2:0]        ld_tile,
  output logic [TILE_W-1:0] ld_data,
  output logic              kv_done,
  output logic              done
);
  logic             active;
  ld_kind_e         kind, kind_d;
  logic [TOK_W-1:0] t, t_d;
  logic [2:0]       ft, ft_d;
  logic             v_d;
  logic [TILE_W-1:0] vdata_d;
  logic             fire, last_t;

  assign in_ready = active;
  assign fire     = in_valid && active;
  assign last_t   = (32'(t) + 1 >= 32'(n_tok));

  // decoder engine
  logic signed [DATA_W-1:0] dec_in  [C_HEADS][MACS];
  logic signed [DATA_W-1:0] dec_out [H_HEADS][MACS];
  logic                     dec_v;
  always_comb begin
    for (int c = 0; c < C_HEADS; c++)
      for (int m = 0; m < MACS; m++)
        dec_in[c][m] = in_data[(c*MACS+m)*DATA_W +: DATA_W];
  end
  ae_engine #(.IN_H(C_HEADS), .OUT_H(H_HEADS), .LANES(MACS)) u_decoder (
    .clk, .rst_n, .w_we(dw_we), .w_addr(dw_addr), .w_data(dw_data),
    .in_valid(fire && (kind != LD_V)), .in_vec(dec_in), .out_valid(dec_v), .out_vec(dec_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; kind <= LD_K; t <= '0; ft <= '0;
      kind_d <= LD_K; t_d <= '0; ft_d <= '0; v_d <= 1'b0; vdata_d <= '0;
      kv_done <= 1'b0; done <= 1'b0;
    end else begin
      v_d     <= fire;
      kind_d  <= kind;
      t_d     <= t;
      ft_d    <= ft;
      vdata_d <= in_data[TILE_W-1:0];
      if (start) begin
        active <= (n_tok != 0); kind <= LD_K; t <= '0; ft <= '0;
        kv_done <= 1'b0; done <= 1'b0;
      end else if (fire) begin
        ft <= ft + 1'b1;
        if (ft == 3'(TILES-1)) begin
          ft <= '0;
          if (last_t) begin
            t <= '0;
            unique case (kind)
              LD_K:    kind <= LD_V;
              LD_V:    kind <= LD_Q;
              default: active <= 1'b0;
            endcase
          end else t <= t + 1'b1;
        end
      end
      // status follows the write stage
      if (v_d && ft_d == 3'(TILES-1) && (32'(t_d) + 1 >= 32'(n_tok))) begin
        if (kind_d == LD_V) kv_done <= 1'b1;
        if (kind_d == LD_Q) done    <= 1'b1;
      end
    end
  end

  always_comb begin
    ld_kind = kind_d;
    ld_row  = t_d;
    ld_tile = ft_d;
    if (kind_d == LD_V) ld_data = vdata_d;
    else begin
      for (int m = 0; m < MACS; m++) ld_data[m*DATA_W +: DATA_W] = dec_out[head][m];
    end
    ld_we_d = v_d && ((kind_d == LD_Q) || (t_d < ngt));
    ld_we_s = v_d && (kind_d != LD_Q) && (t_d >= ngt);
  end

  // a decoded beat is always followed by its write
  a_dec_aligned: assert property (@(posedge clk) disable iff (!rst_n) dec_v |-> v_d);
endmodule
