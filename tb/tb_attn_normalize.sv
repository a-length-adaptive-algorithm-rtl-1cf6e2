// tb_attn_normalize: rows of random exponent values e_j (12 fraction bits) and
// value rows v_j (int8) of random length; each output word must equal
// sat8((sum_j e_j v_j) * floor(2^40 / sum_j e_j) >>> 40) per lane, and lie within
// one LSB of the real weighted mean. The next row is streamed while the previous
// one is still being divided (the accumulate/hold split); the result latency
// after a row's last element is checked against the documented ~43 cycles.
module tb_attn_normalize;
  localparam int DH = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic e_valid = 1'b0, e_last = 1'b0, busy, z_valid;
  logic [23:0] e_val = '0;
  logic [DH*8-1:0] e_v = '0, z;
  int cyc = 0;
  longint exp_z [$];
  real    exp_r [$];
  int     t_last [$];
  int     overlap = 0;

  attn_normalize #(.D_HEAD(DH)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (e_valid && busy) overlap++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NROW = 60;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < NROW; r++) begin
      int n;
      longint acc [DH], sum, rc;
      longint ez [DH];
      real er [DH];
      n = 1 + int'($urandom % 40);
      sum = 0;
      for (int d = 0; d < DH; d++) acc[d] = 0;
      for (int j = 0; j < n; j++) begin
        int e;
        e = (r % 7 == 3) ? 0 : int'($urandom % 4097);
        e_valid = 1'b1; e_val = 24'(e);
        for (int d = 0; d < DH; d++) begin
          int v;
          v = int'($signed(8'($urandom)));
          e_v[d*8 +: 8] = 8'(v);
          acc[d] += longint'(e) * v;
        end
        sum += e;
        e_last = (j == n - 1);
        if (e_last) while (busy) begin e_valid = 1'b0; @(negedge clk); e_valid = 1'b1; end
        if (e_last) t_last.push_back(cyc);
        @(negedge clk);
      end
      e_valid = 1'b0; e_last = 1'b0;
      rc = (64'sd1 <<< 40) / ((sum == 0) ? 1 : sum);
      for (int d = 0; d < DH; d++) begin
        ez[d] = tb_ref_pkg::sat8((acc[d] * rc) >>> 40);
        er[d] = (sum == 0) ? 0.0 : real'(acc[d]) / real'(sum);
      end
      for (int d = 0; d < DH; d++) begin exp_z.push_back(ez[d]); exp_r.push_back(er[d]); end
      repeat ($urandom % 3) @(negedge clk);
    end
  end

  initial begin
    int got = 0;
    @(posedge rst_n);
    while (got < NROW) begin
      @(posedge clk); #1;
      if (z_valid) begin
        longint ez [DH];
        real er [DH];
        int lat;
        for (int d = 0; d < DH; d++) begin ez[d] = exp_z.pop_front(); er[d] = exp_r.pop_front(); end
        lat = cyc - t_last.pop_front();
        checks++;
        if (lat < 40 || lat > 55) begin failures++; $display("FAIL: row %0d latency %0d", got, lat); end
        for (int d = 0; d < DH; d++) begin
          real dr;
          checks += 2;
          if (longint'($signed(z[d*8 +: 8])) != ez[d]) begin
            failures++; $display("FAIL: row %0d lane %0d: %0d exp %0d", got, d, $signed(z[d*8 +: 8]), ez[d]);
          end
          dr = real'($signed(z[d*8 +: 8])) - er[d];
          if (dr > 1.0 || dr < -1.0) begin failures++; $display("FAIL: row %0d lane %0d far from %f", got, d, er[d]); end
        end
        got++;
      end
    end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL: no row overlapped a division"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
