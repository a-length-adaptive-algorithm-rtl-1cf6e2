// tb_layernorm_unit: layer normalization of random int8 rows (D = 16) against an
// independent integer reference (tb_ref_pkg::layernorm) and against real-valued
// (x - mean) / std with a tolerance. Rows of constant values (zero variance) are
// included. Checks that elements leave in index order, one per cycle, that done
// comes with the last one, and that start-to-first-output latency stays within
// the documented ~75 cycles.
module tb_layernorm_unit;
  import tb_ref_pkg::*;
  localparam int D = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, start = 1'b0;
  logic [11:0] in_idx = '0;
  logic signed [7:0] in_val = '0;
  logic busy, o_valid, done;
  logic [11:0] o_idx;
  logic signed [7:0] o_val;
  int cyc = 0;

  layernorm_unit #(.D(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int v[], y[];
    v = new[D];
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int row = 0; row < 40; row++) begin
      int t0, nout, lat;
      real mean, var_r;
      for (int i = 0; i < D; i++) begin
        v[i] = (row % 10 == 9) ? 5 : int'($signed(8'($urandom)));
        if (row % 3 == 1) v[i] = v[i] / 16;
      end
      layernorm(D, v, y);
      // feed in reverse order to show that the index, not the order, places values
      for (int i = D - 1; i >= 0; i--) begin
        in_valid = 1'b1; in_idx = 12'(i); in_val = 8'(v[i]); @(negedge clk);
      end
      in_valid = 1'b0;
      start = 1'b1; t0 = cyc; @(negedge clk); start = 1'b0;
      mean = 0; var_r = 0;
      for (int i = 0; i < D; i++) mean += v[i];
      mean /= D;
      for (int i = 0; i < D; i++) var_r += (v[i] - mean) * (v[i] - mean);
      var_r /= D;
      nout = 0; lat = -1;
      while (nout < D) begin
        @(posedge clk); #1;
        if (o_valid) begin
          if (lat < 0) lat = cyc - t0;
          checks++;
          if (o_idx != 12'(nout) || o_val != 8'(y[nout])) begin
            failures++;
            $display("FAIL: row %0d idx %0d (exp %0d) got %0d exp %0d", row, o_idx, nout, o_val, y[nout]);
          end
          if (var_r > 1.0) begin
            real r, d;
            r = (v[nout] - mean) / $sqrt(var_r) * 16.0;
            if (r > 127) r = 127; if (r < -128) r = -128;
            d = real'(o_val) - r;
            checks++;
            if (d > 1.5 || d < -1.5) begin
              failures++; $display("FAIL: row %0d elem %0d: %0d vs real %f", row, nout, o_val, r);
            end
          end
          checks++;
          if (done != (nout == D - 1)) begin failures++; $display("FAIL: done at %0d", nout); end
          nout++;
        end
      end
      checks++;
      if (lat < 60 || lat > 80) begin failures++; $display("FAIL: latency %0d", lat); end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL: busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
