// vitcod_ctrl: run-time controller of the ViTCoD accelerator for one head.
//
// Sequence after start:
//   LOAD   the loader starts; Q presence bits are cleared. As soon as all K
//          and V rows are on chip (kv_done), both engines are started
//          together, so they compute while Q rows are still streaming in.
//   RUN    waits until the denser engine, the sparser engine and the loader
//          have all finished (each done is remembered).
//   NORM   starts the normaliser and waits for its done.
//   DONE   done pulses for one cycle.
// cyc_total counts cycles from start to done, cyc_run cycles in which both
// engines are working at the same time. Engines running concurrently follows
// the paper; the exact phase sequence is this design's choice.
module vitcod_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        ld_start,
  output logic        q_clr,
  input  logic        ld_kv_done,
  input  logic        ld_done,
  output logic        eng_start,
  input  logic        d_done,
  input  logic        s_done,
  input  logic        d_busy,
  input  logic        s_busy,
  output logic        norm_start,
  input  logic        norm_done,
  output logic [31:0] cyc_total,
  output logic [31:0] cyc_run
);
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_RUN, C_NORM, C_DONE} cst_e;
  cst_e st;
  logic d_fin, s_fin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; d_fin <= 1'b0; s_fin <= 1'b0; cyc_total <= '0; cyc_run <= '0;
    end else begin
      if (st != C_IDLE && st != C_DONE) cyc_total <= cyc_total + 1;
      if (d_busy && s_busy) cyc_run <= cyc_run + 1;
      if (d_done) d_fin <= 1'b1;
      if (s_done) s_fin <= 1'b1;
      unique case (st)
        C_IDLE: if (start) begin
          st <= C_LOAD; d_fin <= 1'b0; s_fin <= 1'b0; cyc_total <= '0; cyc_run <= '0;
        end
        C_LOAD: if (ld_kv_done) st <= C_RUN;
        C_RUN:  if ((d_fin || d_done) && (s_fin || s_done) && ld_done) st <= C_NORM;
        C_NORM: if (norm_done) st <= C_DONE;
        C_DONE: st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  // one-cycle pulses on entering a state
  logic ld_kv_seen;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_kv_seen <= 1'b0;
    else        ld_kv_seen <= (st == C_LOAD) && ld_kv_done;
  end

  assign ld_start   = (st == C_IDLE) && start;
  assign q_clr      = ld_start;
  assign eng_start  = ld_kv_seen;
  assign norm_start = (st == C_RUN) && (d_fin || d_done) && (s_fin || s_done) && ld_done;
  assign busy       = (st != C_IDLE);
  assign done       = (st == C_DONE);
endmodule
