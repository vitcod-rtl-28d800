// tb_mac_pe: checks one MAC in both accumulation modes against integer
// arithmetic: inter-PE (psum_out = a*b + psum_in, accumulator untouched) and
// intra-PE (acc accumulates a*b, clr restarts from a*b), with random operands.
module tb_mac_pe;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic en = 0, intra = 0, clr = 0;
  logic signed [7:0] a = 0; logic signed [16:0] b = 0;
  logic signed [31:0] psum_in = 0, psum_out, acc;
  int checks = 0, failures = 0;
  longint model;

  mac_pe dut (.*);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // inter-PE
    for (int n = 0; n < 200; n++) begin
      a = 8'($urandom); b = 17'($urandom); psum_in = $urandom; intra = 0; en = 1;
      #0.5; checks++;
      if (psum_out !== 32'(longint'(a) * longint'(b) + longint'(psum_in))) failures++;
      @(negedge clk);
      checks++; if (acc !== 0) failures++;
    end
    // intra-PE
    model = 0;
    for (int n = 0; n < 300; n++) begin
      a = 8'($urandom); b = 17'($urandom % 65536); intra = 1; en = ($urandom % 4) != 0;
      clr = (n % 37) == 0;
      if (en) model = (clr ? 0 : model) + longint'(a) * longint'(b);
      @(negedge clk);
      checks++; if (acc !== 32'(model)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
