// tb_mac_line: checks an 8-MAC line: the inter-PE chain must equal psum_in plus
// the 8-element dot product; in intra-PE mode each MAC must hold the running
// sum of its own products.
module tb_mac_line;
  import vitcod_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic en = 0, intra = 0, clr = 0;
  logic signed [7:0] a [MACS]; logic signed [16:0] b [MACS];
  logic signed [31:0] psum_in = 0, dot, acc [MACS];
  int checks = 0, failures = 0;
  longint m [MACS], s;

  mac_line dut (.*);

  initial begin
    for (int i = 0; i < MACS; i++) begin a[i] = 0; b[i] = 0; m[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      intra = 0; en = 1; psum_in = 32'($urandom % 100000);
      s = longint'(psum_in);
      for (int i = 0; i < MACS; i++) begin
        a[i] = 8'($urandom); b[i] = 17'($urandom); s += longint'(a[i]) * longint'(b[i]);
      end
      #0.5; checks++; if (dot !== 32'(s)) failures++;
      @(negedge clk);
    end
    for (int n = 0; n < 100; n++) begin
      intra = 1; en = 1; clr = (n == 0);
      for (int i = 0; i < MACS; i++) begin
        a[i] = 8'($urandom); b[i] = 17'($urandom % 65536);
        m[i] = (clr ? 0 : m[i]) + longint'(a[i]) * longint'(b[i]);
      end
      @(negedge clk);
      for (int i = 0; i < MACS; i++) begin checks++; if (acc[i] !== 32'(m[i])) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
