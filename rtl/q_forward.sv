// q_forward: query-based Q forwarding from the denser to the sparser engine.
//
// The sparser engine does not keep Q rows of its own. For every non-zero it
// works on, each of its G row groups asks for a Q row; the request is served
// on demand from the denser engine's Q buffer, whose q_present bitmap says
// which rows have already arrived from off-chip memory. If every active
// request hits, the rows are forwarded in the same cycle (the denser Q buffer
// has G extra read ports, fwd_row drives them) and stall stays low; if any
// row is still missing, stall holds the sparser engine until the loader has
// delivered it. hits counts forwarded rows, stalls counts stalled cycles.
// The on-demand query follows the paper; serving every Q row of the sparser
// engine this way (no fallback path to off-chip memory) is this design's own.
module q_forward
  import vitcod_pkg::*;
#(
  parameter int unsigned G = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr_cnt,
  input  logic             req_valid [G],
  input  logic [TOK_W-1:0] req_row   [G],
  input  logic [N_MAX-1:0] q_present,
  output logic [TOK_W-1:0] fwd_row   [G],
  output logic             stall,
  output logic [31:0]      hits,
  output logic [31:0]      stalls
);
  logic [$clog2(G+1)-1:0] n_req;

  always_comb begin
    stall = 1'b0;
    n_req = '0;
    for (int g = 0; g < G; g++) begin
      fwd_row[g] = req_row[g];
      if (req_valid[g]) begin
        n_req = n_req + 1'b1;
        if ((32'(req_row[g]) >= N_MAX) || !q_present[req_row[g]]) stall = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hits   <= '0;
      stalls <= '0;
    end else if (clr_cnt) begin
      hits   <= '0;
      stalls <= '0;
    end else if (stall) begin
      stalls <= stalls + 1;
    end else begin
      hits <= hits + 32'(n_req);
    end
  end
endmodule
