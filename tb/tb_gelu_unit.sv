// tb_gelu_unit: all 256 int8 inputs (four fraction bits) against the real GELU
// x/2 (1 + tanh(sqrt(2/pi) (x + 0.044715 x^3))); allowed error is one LSB (1/16).
module tb_gelu_unit;
  int checks = 0, failures = 0;
  logic signed [7:0] x, y;
  gelu_unit dut (.x, .y);

  function automatic real tanh_r(real a);
    return ($exp(a) - $exp(-a)) / ($exp(a) + $exp(-a));
  endfunction

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      real xr, g, d;
      x = 8'(v); #1;
      xr = v / 16.0;
      g = 0.5 * xr * (1.0 + tanh_r(0.7978845608 * (xr + 0.044715 * xr * xr * xr)));
      d = real'(y) / 16.0 - g;
      checks++;
      if (d > 1.0 / 16 || d < -1.0 / 16) begin
        failures++; if (failures < 10) $display("FAIL: gelu(%0d) = %0d, real %f", v, y, g * 16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
