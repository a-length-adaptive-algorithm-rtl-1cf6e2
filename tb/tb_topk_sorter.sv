// tb_topk_sorter: feeds rows of random scores (with many ties) one per cycle, some
// rows shorter and some longer than TOPK, and checks the sorted Top-k indices,
// the count and that the result is ready one cycle after the last input.
module tb_topk_sorter;
  localparam int TOPK = 30, SW = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, done;
  logic signed [SW-1:0] in_score, osc [TOPK];
  logic [15:0] in_idx;
  logic [TOPK*16-1:0] oidx;
  logic [7:0] ocnt;

  topk_sorter #(.TOPK(TOPK), .SW(SW)) dut (.clk, .rst_n, .in_valid, .in_last, .in_score, .in_idx,
    .done, .out_idx(oidx), .out_score(osc), .out_cnt(ocnt));

  initial begin
    repeat (100000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int row = 0; row < 40; row++) begin
      int n, sc [], cnt;
      bit taken [];
      n = 1 + $urandom % 80;
      sc = new[n]; taken = new[n];
      for (int j = 0; j < n; j++) begin
        sc[j] = int'($urandom % 21) - 10;
        @(negedge clk);
        in_valid = 1; in_last = (j == n - 1); in_score = SW'(sc[j]); in_idx = 16'(j);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL: done not one cycle after last"); end
      cnt = (n < TOPK) ? n : TOPK;
      checks++;
      if (int'(ocnt) != cnt) begin failures++; $display("FAIL: count %0d exp %0d", ocnt, cnt); end
      for (int t = 0; t < cnt; t++) begin
        int b; b = -1;
        for (int j = 0; j < n; j++) if (!taken[j] && (b < 0 || sc[j] > sc[b])) b = j;
        taken[b] = 1;
        checks++;
        if (int'(oidx[t*16 +: 16]) != b) begin
          failures++; if (failures < 10) $display("FAIL: row %0d rank %0d idx %0d exp %0d", row, t, oidx[t*16 +: 16], b);
        end
      end
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
