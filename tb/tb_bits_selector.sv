// tb_bits_selector: checks the 1-bit (sign) quantizer on random words and the
// 4-bit scaled quantizer against real-valued round((7/|M|) x), saturated to +/-7.
module tb_bits_selector;
  localparam int LANES = 8;
  int checks = 0, failures = 0;
  logic [LANES*8-1:0] x;
  logic [15:0] scale;
  logic [LANES-1:0]   c1;
  logic [LANES*4-1:0] c4;

  bits_selector #(.LANES(LANES), .QBITS(1)) u1 (.x, .scale, .code(c1));
  bits_selector #(.LANES(LANES), .QBITS(4)) u4 (.x, .scale, .code(c4));

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      real m;
      x = {$urandom, $urandom};
      m = 0.5 + ($urandom % 1000) / 100.0;      // |M| in activation units
      scale = 16'($rtoi(7.0 / m * 4096.0));
      #1;
      for (int l = 0; l < LANES; l++) begin
        int v, e, got;
        real r;
        v = int'($signed(x[l*8 +: 8]));
        checks++;
        if (c1[l] != (v < 0)) begin failures++; $display("FAIL: sign of %0d", v); end
        r = v * real'(scale) / 4096.0;
        e = (r >= 0) ? $rtoi(r + 0.5) : -$rtoi(-r + 0.5);
        if (r < 0 && (-r + 0.5) == $floor(-r + 0.5)) e = e + 1;   // exact .5 rounds up
        if (e > 7) e = 7;
        if (e < -7) e = -7;
        got = int'($signed(c4[l*4 +: 4]));
        checks++;
        if (got != e) begin failures++; if (failures < 10) $display("FAIL: q4(%0d, %0d) = %0d exp %0d", v, scale, got, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
