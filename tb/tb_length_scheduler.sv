// tb_length_scheduler: the scheduler drives three behavioural stages whose
// service time grows with the sequence length (a different slope per stage).
// For several random batches it checks: the sort order (decreasing length, the
// lower index first on a tie); that every stage takes the sequences in sorted
// order, layer after layer; that no job is issued before the sequence finished
// the previous stage (or, for Stage 1, the previous layer); that a stage never
// gets a second job while one is in flight; that every (sequence, layer, stage)
// runs exactly once; and that the busy counters match. It also counts how
// often a sequence's next layer entered Stage 1 while Stage 3 was still busy
// with the current layer, and how often all three stages were busy at once.
module tb_length_scheduler;
  import lat_pkg::*;
  localparam int B = 6;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [$clog2(B+1)-1:0] batch_cnt = '0;
  logic [11:0] batch_len [B];
  logic [4:0]  num_layers = '0;
  logic running, done;
  logic job_valid [3];
  job_t job [3];
  logic stage_done [3];
  logic [31:0] busy_cycles [3], wait_cycles [3], total_cycles;
  logic [4:0] order [B];

  length_scheduler #(.BATCH(B)) dut (.*);

  always #5 clk = ~clk;

  // behavioural stages
  int  remain [3];
  int  cur_slot [3], cur_layer [3];
  int  prog [B];          // finished (layer*3 + stage) count per sequence
  int  nissue [3];
  int  expect_ord [B];
  int  n_seq, n_lay;
  int  busy_meas [3];
  int  overlap_layers = 0, all_three = 0;
  int  pos_chk [3];

  initial for (int s = 0; s < 3; s++) begin stage_done[s] = 1'b0; remain[s] = 0; end
  initial begin
    for (int b = 0; b < B; b++) begin batch_len[b] = '0; prog[b] = 0; expect_ord[b] = 0; end
    for (int s = 0; s < 3; s++) begin nissue[s] = 0; busy_meas[s] = 0; pos_chk[s] = 0; end
    n_seq = 1; n_lay = 1;
  end

  always @(posedge clk) if (rst_n) begin
    if (running && dut.st == 2'd2) begin
      if (remain[0] > 0 && remain[1] > 0 && remain[2] > 0) all_three++;
    end
    for (int s = 0; s < 3; s++) begin
      stage_done[s] <= 1'b0;
      if (remain[s] > 0) begin
        busy_meas[s]++;
        remain[s]--;
        if (remain[s] == 0) begin
          stage_done[s] <= 1'b1;
          prog[cur_slot[s]]++;
        end
      end
      if (job_valid[s]) begin
        int b, l;
        b = int'(job[s].slot); l = int'(job[s].layer);
        checks++;
        if (remain[s] != 0) begin failures++; $display("FAIL: stage %0d got a job while busy", s); end
        checks++;
        if (b != expect_ord[pos_chk[s]] || l != nissue[s] / n_seq) begin
          failures++; $display("FAIL: stage %0d job slot %0d layer %0d, expected slot %0d layer %0d",
                               s, b, l, expect_ord[pos_chk[s]], nissue[s] / n_seq);
        end
        checks++;
        if (prog[b] != l * 3 + s) begin
          failures++; $display("FAIL: stage %0d slot %0d layer %0d issued at progress %0d", s, b, l, prog[b]);
        end
        checks++;
        if (int'(job[s].len) != int'(batch_len[b])) begin failures++; $display("FAIL: job length"); end
        if (s == 0 && l > 0 && remain[2] > 0) overlap_layers++;
        pos_chk[s] = (pos_chk[s] + 1) % n_seq;
        nissue[s]++;
        cur_slot[s] = b; cur_layer[s] = l;
        remain[s] = 3 + int'(batch_len[b]) * (s + 1) / 2;
        // the scheduler counts from the cycle after the issue pulse up to and
        // including the cycle that sees stage_done: the service time plus two
        busy_meas[s] += 2;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int run = 0; run < 8; run++) begin
      int used [B];
      n_seq = (run == 0) ? B : 1 + int'($urandom % B);
      n_lay = 1 + int'($urandom % 4);
      for (int b = 0; b < B; b++) begin
        batch_len[b] = (b < n_seq) ? 12'(1 + $urandom % 60) : 12'd0;
        if (run == 1 && b == 1) batch_len[b] = batch_len[0];   // a tie
        used[b] = 0; prog[b] = 0;
      end
      // reference sort: repeatedly the longest unused, lowest index on a tie
      for (int k = 0; k < n_seq; k++) begin
        int best;
        best = -1;
        for (int b = 0; b < n_seq; b++)
          if (!used[b] && (best < 0 || batch_len[b] > batch_len[best])) best = b;
        expect_ord[k] = best; used[best] = 1;
      end
      for (int s = 0; s < 3; s++) begin nissue[s] = 0; busy_meas[s] = 0; pos_chk[s] = 0; end
      batch_cnt = ($clog2(B+1))'(n_seq); num_layers = 5'(n_lay);
      start = 1'b1; @(negedge clk); start = 1'b0;
      while (!done) @(negedge clk);
      for (int k = 0; k < n_seq; k++) begin
        checks++;
        if (int'(order[k]) != expect_ord[k]) begin failures++; $display("FAIL: order[%0d] = %0d exp %0d", k, order[k], expect_ord[k]); end
      end
      for (int b = 0; b < n_seq; b++) begin
        checks++;
        if (prog[b] != 3 * n_lay) begin failures++; $display("FAIL: slot %0d ran %0d stage-layers", b, prog[b]); end
      end
      for (int s = 0; s < 3; s++) begin
        checks += 2;
        if (nissue[s] != n_seq * n_lay) begin failures++; $display("FAIL: stage %0d issued %0d", s, nissue[s]); end
        if (int'(busy_cycles[s]) != busy_meas[s]) begin
          failures++; $display("FAIL: stage %0d busy counter %0d, measured %0d", s, busy_cycles[s], busy_meas[s]);
        end
      end
      $display("run %0d: %0d seqs, %0d layers, %0d cycles, busy %0d/%0d/%0d wait %0d/%0d/%0d", run, n_seq, n_lay,
               total_cycles, busy_cycles[0], busy_cycles[1], busy_cycles[2], wait_cycles[0], wait_cycles[1], wait_cycles[2]);
      repeat (3) @(negedge clk);
    end
    checks++;
    if (overlap_layers == 0) begin failures++; $display("FAIL: no next layer overlapped Stage 3"); end
    checks++;
    if (all_three == 0) begin failures++; $display("FAIL: the three stages were never busy together"); end
    $display("next-layer overlaps %0d, cycles with all stages busy %0d", overlap_layers, all_three);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
