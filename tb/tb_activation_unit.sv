// tb_activation_unit: all 256 inputs in each mode. Bypass and ReLU must be
// exact; GELU (4 fractional bits) must be within 1 LSB + 0.3 of the real GELU
// x * Phi(x), with Phi from the tanh approximation of the normal CDF.
module tb_activation_unit;
  logic [1:0] mode; logic signed [7:0] x, y;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction
  real xr, g;

  activation_unit dut (.*);

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      mode = 0; #1; checks++; if (y != x) failures++;
      mode = 1; #1; checks++; if (int'(y) != ((v < 0) ? 0 : v)) failures++;
      mode = 2; #1;
      xr = real'(v) / 16.0;
      g  = xr * 0.5 * (1.0 + $tanh(0.7978845608 * (xr + 0.044715 * xr * xr * xr)));
      checks++;
      if (fabs(real'(y) / 16.0 - g) > 0.1) begin
        failures++; $display("gelu x=%f y=%f ref=%f", xr, real'(y)/16.0, g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
