// tb_candidate_loader: Stage 2.1 against an HBM model holding Q, K, V rows and
// Top-k index words written by the testbench. For random rows (full and partly
// filled candidate lists, different heads and slots) it checks every word written
// into the double-buffer bank (q at 0, K_s at 1..TOPK, V_s at TOPK+1..2*TOPK), the
// meta word (candidate count), the row time of 2*count + 7 cycles, and that the
// loader does not start while the buffer has no free bank (w_ready low).
module tb_candidate_loader;
  import tb_ref_pkg::*;
  localparam int LANES = 8, TOPK = 3, AW = $clog2(2 * TOPK + 1);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [4:0] slot = '0, head = '0;
  logic [11:0] row = '0;
  logic busy, done, rd_en, w_ready = 1'b1, w_en, w_done;
  logic [31:0] rd_addr;
  logic [LANES*8-1:0] rd_data, w_data;
  logic [AW-1:0] w_addr;
  logic [7:0] w_meta;
  logic hbm_rd_en [1], hbm_wr_en [1];
  logic [31:0] hbm_rd_addr [1], hbm_wr_addr [1];
  logic [LANES*8-1:0] hbm_rd_data [1], hbm_wr_data [1];
  logic [LANES*8-1:0] bank [2*TOPK+1];
  int n_wdone = 0, meta_seen = 0, wr_blocked = 0;

  candidate_loader #(.LANES(LANES), .TOPK(TOPK)) dut (.*);
  hbm_model #(.NP(1), .LANES(LANES)) u_hbm (.clk, .rd_en(hbm_rd_en), .rd_addr(hbm_rd_addr),
    .rd_data(hbm_rd_data), .wr_en(hbm_wr_en), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));
  assign hbm_rd_en[0] = rd_en;
  assign hbm_rd_addr[0] = rd_addr;
  assign rd_data = hbm_rd_data[0];
  assign hbm_wr_en[0] = 1'b0;
  assign hbm_wr_addr[0] = '0;
  assign hbm_wr_data[0] = '0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (w_en) bank[w_addr] <= w_data;
    if (w_done) begin n_wdone++; meta_seen = int'(w_meta); end
    if (!w_ready && (w_en || w_done)) wr_blocked++;
  end

  function automatic logic [LANES*8-1:0] rowword(int tag, int tok);
    logic [LANES*8-1:0] w;
    for (int l = 0; l < LANES; l++) w[l*8 +: 8] = 8'(hash32(tag * 4096 + tok * 16 + l));
    return w;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2 * TOPK + 1; i++) bank[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      int s, h, r, cnt, idx [TOPK], t0, t1, nbefore;
      logic [LANES*8-1:0] tk;
      s = int'($urandom % 4); h = int'($urandom % 3); r = int'($urandom % 40);
      cnt = (t % 3 == 0) ? 1 + int'($urandom % TOPK) : TOPK;
      tk = '0;
      for (int c = 0; c < TOPK; c++) begin
        idx[c] = int'($urandom % 40);
        tk[16*c +: 16] = 16'(idx[c]);
      end
      tk[LANES*8-1 -: 8] = 8'(cnt);
      u_hbm.poke(aaddr(4, s, h, r, 0), tk);
      u_hbm.poke(aaddr(1, s, h, r, 0), rowword(1000 + s * 64 + h, r));
      for (int c = 0; c < TOPK; c++) begin
        u_hbm.poke(aaddr(2, s, h, idx[c], 0), rowword(2000 + s * 64 + h, idx[c]));
        u_hbm.poke(aaddr(3, s, h, idx[c], 0), rowword(3000 + s * 64 + h, idx[c]));
      end
      for (int i = 0; i < 2 * TOPK + 1; i++) bank[i] = '1;
      // every fourth row finds no free bank for a while
      slot = 5'(s); head = 5'(h); row = 12'(r);
      nbefore = n_wdone;
      if (t % 4 == 2) begin
        // no free bank: a start is not taken until w_ready returns
        w_ready = 1'b0; start = 1'b1;
        repeat (20) begin
          @(negedge clk);
          checks++;
          if (busy || rd_en) begin failures++; $display("FAIL: started without a free bank"); end
        end
        w_ready = 1'b1;
      end
      start = 1'b1; @(negedge clk); start = 1'b0; t0 = $time / 10;
      while (!done) @(negedge clk);
      t1 = $time / 10;
      @(posedge clk); #1;
      checks += 2;
      if (n_wdone != nbefore + 1) begin failures++; $display("FAIL: w_done pulses %0d", n_wdone - nbefore); end
      if (meta_seen != cnt) begin failures++; $display("FAIL: meta %0d exp %0d", meta_seen, cnt); end
      checks++;
      if (bank[0] != rowword(1000 + s * 64 + h, r)) begin failures++; $display("FAIL: q word row %0d", t); end
      for (int c = 0; c < cnt; c++) begin
        checks += 2;
        if (bank[1 + c] != rowword(2000 + s * 64 + h, idx[c])) begin failures++; $display("FAIL: k word %0d row %0d", c, t); end
        if (bank[1 + TOPK + c] != rowword(3000 + s * 64 + h, idx[c])) begin failures++; $display("FAIL: v word %0d row %0d", c, t); end
      end
      begin
        // done is high 2*count + 6 edges after the edge that took start:
        // the row holds the loader for 2*count + 7 cycles
        checks++;
        if (t1 - t0 != 2 * cnt + 6) begin
          failures++; $display("FAIL: row %0d took %0d cycles, count %0d", t, t1 - t0 + 1, cnt);
        end
      end
      @(negedge clk); @(negedge clk);
    end
    checks++;
    if (wr_blocked != 0) begin failures++; $display("FAIL: wrote into a full bank %0d times", wr_blocked); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
