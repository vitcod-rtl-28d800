// tb_ae_engine: loads a random 3x6 encoder matrix, streams random beats and
// checks each output one cycle later against sat8(W.x >>> 6); also checks
// that out_valid follows in_valid by one cycle.
module tb_ae_engine;
  import vitcod_pkg::*;
  localparam int IH = 6, OH = 3, L = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic w_we = 0; logic [4:0] w_addr = 0; logic signed [7:0] w_data = 0;
  logic in_valid = 0; logic signed [7:0] in_vec [IH][L]; logic out_valid;
  logic signed [7:0] out_vec [OH][L];
  int w [OH][IH];
  int checks = 0, failures = 0;

  ae_engine #(.IN_H(IH), .OUT_H(OH), .LANES(L)) dut (.*);

  function automatic int sat(longint v); return (v > 127) ? 127 : (v < -128) ? -128 : int'(v); endfunction

  initial begin
    for (int i = 0; i < IH; i++) for (int l = 0; l < L; l++) in_vec[i][l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int o = 0; o < OH; o++) for (int i = 0; i < IH; i++) begin
      w[o][i] = int'($urandom % 128) - 64;
      w_we = 1; w_addr = 5'(o*IH + i); w_data = 8'(w[o][i]); @(negedge clk);
    end
    w_we = 0;
    for (int n = 0; n < 200; n++) begin
      int x [IH][L];
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < IH; i++) for (int l = 0; l < L; l++) begin
        x[i][l] = int'($urandom % 256) - 128; in_vec[i][l] = 8'(x[i][l]);
      end
      @(negedge clk);
      checks++; if (out_valid !== in_valid) failures++;
      if (in_valid)
        for (int o = 0; o < OH; o++) for (int l = 0; l < L; l++) begin
          longint s; s = 0;
          for (int i = 0; i < IH; i++) s += w[o][i] * x[i][l];
          checks++; if (int'(out_vec[o][l]) != sat(s >>> 6)) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
