// tb_at_sel_unit: streams random 1-bit key codes against a query at one key per
// cycle and checks each score (number of agreeing signs minus disagreeing ones),
// the index and the one-cycle latency.
module tb_at_sel_unit;
  localparam int D = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  logic [D-1:0] q, k;
  logic [15:0] idx = 0, oidx;
  logic signed [9:0] score;
  int exp_q [$];

  at_sel_unit #(.D_HEAD(D), .QBITS(1)) dut (.clk, .rst_n, .in_valid, .in_last, .q_code(q), .k_code(k),
    .k_idx(idx), .out_valid, .out_last, .score, .out_idx(oidx));

  initial begin
    repeat (10000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (out_valid) begin
    int e;
    e = exp_q.pop_front();
    checks++;
    if (int'(score) != e) begin failures++; $display("FAIL: idx %0d score %0d exp %0d", oidx, score, e); end
  end

  initial begin
    q = {$urandom, $urandom};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 200; j++) begin
      int e; e = 0;
      @(negedge clk);
      k = {$urandom, $urandom}; idx = 16'(j); in_valid = 1; in_last = (j == 199);
      for (int d = 0; d < D; d++) e += (q[d] == k[d]) ? 1 : -1;
      exp_q.push_back(e);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || oidx != 16'(j)) begin failures++; $display("FAIL: latency at %0d", j); end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
