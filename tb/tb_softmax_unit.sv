// tb_softmax_unit: compares the exponential operator with exp() computed in
// real arithmetic. For every score the unit can produce (shift 0, dots
// -128..127) the fixed-point result must be within 1.5 % (plus one LSB) of
// 1024 * e^(score/16), or saturated where that exceeds 16 bits; a sweep of
// large dots and shifts checks the scaling and clamping of the score.
module tb_softmax_unit;
  import vitcod_pkg::*;
  logic signed [31:0] dot; logic [4:0] shift; logic signed [7:0] score; logic [15:0] e;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  real ex;

  softmax_unit dut (.*);

  initial begin
    for (int x = -128; x < 128; x++) begin
      dot = x; shift = 0; #1;
      ex = 1024.0 * $exp(real'(x) / 16.0);
      checks++;
      if (ex >= 65535.0) begin if (e != 16'hFFFF) failures++; end
      else if (fabs(real'(e) - ex) > 0.06 * ex + 1.0) begin
        failures++; $display("x=%0d e=%0d exp=%f", x, e, ex);
      end
    end
    for (int n = 0; n < 500; n++) begin
      longint s;
      dot = $urandom; shift = 5'($urandom % 32); #1;
      s = longint'(dot) >>> shift;
      checks++;
      if (int'(score) != ((s > 127) ? 127 : (s < -128) ? -128 : int'(s))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
