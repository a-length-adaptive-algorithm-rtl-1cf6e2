// tb_lut_mult: exhaustive check of the look-up multiplier for 1-bit (sign) codes
// and 4-bit two's-complement codes.
module tb_lut_mult;
  int checks = 0, failures = 0;
  logic       a1, b1;
  logic [3:0] a4, b4;
  logic signed [2:0] p1;
  logic signed [8:0] p4;

  lut_mult #(.QBITS(1)) u1 (.a(a1), .b(b1), .p(p1));
  lut_mult #(.QBITS(4)) u4 (.a(a4), .b(b4), .p(p4));

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {a1, b1} = 2'(i); #1;
      checks++;
      if (int'(p1) != (a1 ? -1 : 1) * (b1 ? -1 : 1)) begin failures++; $display("FAIL: 1-bit %0d", i); end
    end
    for (int i = 0; i < 256; i++) begin
      int ea, eb;
      {a4, b4} = 8'(i); #1;
      ea = (a4 >= 8) ? int'(a4) - 16 : int'(a4);
      eb = (b4 >= 8) ? int'(b4) - 16 : int'(b4);
      checks++;
      if (int'(p4) != ea * eb) begin failures++; $display("FAIL: %0d*%0d = %0d", ea, eb, p4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
