// tb_vitcod_ctrl: plays the loader, both engines and the normaliser around
// the controller with random delays and checks the schedule: ld_start and
// q_clr with an accepted start, eng_start exactly one cycle after kv_done,
// norm_start only after both engines and the Q load finished (engines may
// finish in either order), done one cycle after norm_done, the busy window,
// cyc_total and cyc_run, and that a start while busy is ignored.
module tb_vitcod_ctrl;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, busy, done, ld_start, q_clr, ld_kv_done = 0, ld_done = 0, eng_start;
  logic d_done = 0, s_done = 0, d_busy = 0, s_busy = 0, norm_start, norm_done = 0;
  logic [31:0] cyc_total, cyc_run;
  int checks = 0, failures = 0;

  vitcod_ctrl dut (.*);

  task automatic pulse(ref logic s); s = 1; @(negedge clk); s = 0; endtask

  task automatic one_run(int dk, int dq, int dd, int ds, int dn);
    int both, tot, t0;
    both = 0; tot = 0;
    @(negedge clk); start = 1; #0.1;
    checks++; if (!(ld_start && q_clr)) failures++;
    @(negedge clk); start = 0; tot = 1;
    // a second start while busy must be ignored
    start = 1; #0.1; checks++; if (ld_start) failures++; @(negedge clk); start = 0; tot++;
    repeat (dk) begin #0.1; checks++; if (eng_start) failures++; @(negedge clk); tot++; end
    ld_kv_done = 1; #0.1; checks++; if (eng_start) failures++; @(negedge clk); tot++;
    #0.1; checks++; if (!eng_start) failures++;
    d_busy = 1; s_busy = 1;
    t0 = 0;
    while (!(t0 >= dd && t0 >= ds && t0 >= dq)) begin
      #0.1; checks++; if (norm_start) failures++;
      @(negedge clk); tot++; if (d_busy && s_busy) both++;
      t0++;
      d_done = (t0 == dd); s_done = (t0 == ds); ld_done = (t0 >= dq);
      if (t0 == dd) d_busy = 0;
      if (t0 == ds) s_busy = 0;
    end
    #0.1; checks++; if (!norm_start) failures++;
    @(negedge clk); tot++; d_done = 0; s_done = 0;
    repeat (dn) begin #0.1; checks++; if (done || !busy) failures++; @(negedge clk); tot++; end
    norm_done = 1; @(negedge clk); norm_done = 0;
    #0.1; checks++; if (!done) failures++;
    checks++; if (cyc_total != 32'(tot)) begin failures++; $display("total %0d vs %0d", cyc_total, tot); end
    checks++; if (cyc_run != 32'(both)) begin failures++; $display("run %0d vs %0d", cyc_run, both); end
    @(negedge clk); #0.1; checks++; if (busy || done) failures++;
    ld_kv_done = 0; ld_done = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    one_run(3, 5, 9, 4, 6);
    one_run(0, 12, 2, 8, 1);
    for (int r = 0; r < 20; r++)
      one_run(int'($urandom % 10), int'($urandom % 30) + 1, int'($urandom % 40) + 1,
              int'($urandom % 40) + 1, int'($urandom % 10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
