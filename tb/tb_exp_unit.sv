// tb_exp_unit: sweeps the whole input range of the exponent unit (-16 to 8 in
// steps of 1/256) and compares with the real exponential: the error must stay
// below 0.5 % plus 2 output LSBs. Inputs beyond the range must clamp.
module tb_exp_unit;
  int checks = 0, failures = 0;
  logic signed [23:0] x;
  logic [23:0] y;
  exp_unit dut (.x, .y);

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = -4096; v < 2048; v++) begin
      real e, err;
      x = 24'(v); #1;
      e = $exp(v / 256.0) * 4096.0;
      err = (real'(y) > e) ? real'(y) - e : e - real'(y);
      checks++;
      if (err > 0.005 * e + 2.0) begin
        failures++; if (failures < 10) $display("FAIL: exp(%0d/256) = %0d exp %f", v, y, e);
      end
    end
    x = 24'sd100000; #1; checks++;
    if (real'(y) < 0.995 * $exp(2047 / 256.0) * 4096.0 - 2 || real'(y) > 1.005 * $exp(2047 / 256.0) * 4096.0 + 2) begin
      failures++; $display("FAIL: high clamp %0d", y);
    end
    x = -24'sd100000; #1; checks++;
    if (y > 24'd1) begin failures++; $display("FAIL: low clamp %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
