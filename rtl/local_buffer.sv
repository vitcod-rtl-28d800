// local_buffer: multi-ported on-chip buffer of the ViTCoD engines.
//
// The paper gives every engine buffer (Q/V, K/S, index, output) parallel read
// and write ports; this module provides NR read and NW write ports on one
// array of DEPTH words. A word is split into SEGS equal segments and each
// write port carries a segment mask, so a 64-feature row can be filled one
// 8-feature tile at a time. Reads are combinational (register-file style), a
// write takes effect at the clock edge. Write ports must not target the same
// word and segment in one cycle; the higher-numbered port wins if they do.
// Contents are not reset: readers only read what was written.
module local_buffer #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NR    = 1,
  parameter int unsigned NW    = 1,
  parameter int unsigned SEGS  = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW   = WIDTH / SEGS
) (
  input  logic             clk,
  input  logic             we    [NW],
  input  logic [AW-1:0]    waddr [NW],
  input  logic [SEGS-1:0]  wseg  [NW],
  input  logic [WIDTH-1:0] wdata [NW],
  input  logic [AW-1:0]    raddr [NR],
  output logic [WIDTH-1:0] rdata [NR]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NW; p++) begin
      if (we[p] && (32'(waddr[p]) < DEPTH)) begin
        for (int s = 0; s < SEGS; s++) begin
          if (wseg[p][s]) mem[waddr[p]][s*SW +: SW] <= wdata[p][s*SW +: SW];
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NR; p++) begin
      rdata[p] = (32'(raddr[p]) < DEPTH) ? mem[raddr[p]] : '0;
    end
  end
endmodule
