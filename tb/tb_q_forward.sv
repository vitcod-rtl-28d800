// tb_q_forward: random requests against a random presence bitmap. stall must
// be high exactly when an active request names a missing row, rows must be
// passed to the Q buffer ports unchanged, and the hit and stall counters must
// match a count kept by the testbench.
module tb_q_forward;
  import vitcod_pkg::*;
  localparam int G = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clr_cnt = 0;
  logic req_valid [G]; logic [TOK_W-1:0] req_row [G]; logic [N_MAX-1:0] q_present;
  logic [TOK_W-1:0] fwd_row [G]; logic stall; logic [31:0] hits, stalls;
  int checks = 0, failures = 0, mh = 0, ms = 0;

  q_forward #(.G(G)) dut (.*);

  initial begin
    for (int g = 0; g < G; g++) begin req_valid[g] = 0; req_row[g] = 0; end
    q_present = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      bit exp_stall; int nr; exp_stall = 0; nr = 0;
      for (int b = 0; b < N_MAX; b++) q_present[b] = ($urandom % 8) != 0;
      for (int g = 0; g < G; g++) begin
        req_valid[g] = $urandom % 2; req_row[g] = TOK_W'($urandom % N_MAX);
        if (req_valid[g]) begin nr++; if (!q_present[req_row[g]]) exp_stall = 1; end
      end
      #0.5;
      checks++; if (stall !== exp_stall) begin failures++; if (failures < 4) $display("n=%0d stall %0d exp %0d", n, stall, exp_stall); end
      for (int g = 0; g < G; g++) begin checks++; if (fwd_row[g] !== req_row[g]) failures++; end
      if (exp_stall) ms++; else mh += nr;
      @(negedge clk);
      checks++; if (hits !== 32'(mh) || stalls !== 32'(ms)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
