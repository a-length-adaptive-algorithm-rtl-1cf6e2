// tb_stage2: Stage 2 (At-Comp) alone on one HBM channel, at a reduced size. The
// testbench writes random Q, K, V rows and Top-k index words (random distinct
// keys; fewer than TOPK for a short sequence) into the HBM model, runs two jobs
// and compares every element of Z against the reference: exact scores of the
// selected keys, scaled by rsqrt16(D_HEAD), exp_fx, then
// sat8(sum e v * floor(2^40 / sum e) >>> 40). It also checks that the loader
// (2.1) and the fused loop (2.2) were busy in the same cycles (double buffer).
module tb_stage2;
  import tb_ref_pkg::*;
  import lat_pkg::*;
  localparam int LANES = 8, N_HEADS = 2, TOPK = 3;
  localparam int DH = LANES;
  int checks = 0, failures = 0, overlap = 0;
  logic clk = 1'b0, rst_n = 1'b0, job_valid = 1'b0, busy, done;
  job_t job = '0;
  logic rd_en, wr_en;
  logic [31:0] rd_addr, wr_addr;
  logic [LANES*8-1:0] rd_data, wr_data;
  logic hbm_rd_en [1], hbm_wr_en [1];
  logic [31:0] hbm_rd_addr [1], hbm_wr_addr [1];
  logic [LANES*8-1:0] hbm_rd_data [1], hbm_wr_data [1];

  stage2_atcomp #(.LANES(LANES), .N_HEADS(N_HEADS), .TOPK(TOPK)) dut (.*);
  hbm_model #(.NP(1), .LANES(LANES)) u_hbm (.clk, .rd_en(hbm_rd_en), .rd_addr(hbm_rd_addr),
    .rd_data(hbm_rd_data), .wr_en(hbm_wr_en), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));
  assign hbm_rd_en[0] = rd_en;  assign hbm_rd_addr[0] = rd_addr;  assign rd_data = hbm_rd_data[0];
  assign hbm_wr_en[0] = wr_en;  assign hbm_wr_addr[0] = wr_addr;  assign hbm_wr_data[0] = wr_data;

  always #5 clk = ~clk;
  always @(posedge clk) if (dut.u_load.busy && dut.u_fuse.busy) overlap++;

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_job(int slot, int len, int layer);
    int rows [3][][][];     // [Q/K/V][head][token][lane]
    int sel [][][];         // [head][row][t]
    for (int m = 0; m < 3; m++) begin
      rows[m] = new[N_HEADS];
      for (int h = 0; h < N_HEADS; h++) begin
        rows[m][h] = new[len];
        for (int r = 0; r < len; r++) begin
          logic [LANES*8-1:0] w;
          rows[m][h][r] = new[DH];
          for (int l = 0; l < DH; l++) begin
            rows[m][h][r][l] = int'($urandom % 81) - 40;
            w[l*8 +: 8] = 8'(rows[m][h][r][l]);
          end
          u_hbm.poke(aaddr(1 + m, slot, h, r, 0), w);
        end
      end
    end
    sel = new[N_HEADS];
    for (int h = 0; h < N_HEADS; h++) begin
      sel[h] = new[len];
      for (int i = 0; i < len; i++) begin
        int cnt;
        bit used [];
        logic [LANES*8-1:0] w;
        used = new[len];
        cnt = (len < TOPK) ? len : TOPK;
        sel[h][i] = new[cnt];
        w = '0;
        for (int t = 0; t < cnt; t++) begin
          int j;
          j = int'($urandom % len);
          while (used[j]) j = (j + 1) % len;
          used[j] = 1'b1; sel[h][i][t] = j;
          w[16*t +: 16] = 16'(j);
        end
        w[LANES*8-1 -: 8] = 8'(cnt);
        u_hbm.poke(aaddr(4, slot, h, i, 0), w);
      end
    end
    @(negedge clk);
    job = '{slot: 5'(slot), len: 12'(len), layer: 5'(layer)};
    job_valid = 1'b1; @(negedge clk); job_valid = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int h = 0; h < N_HEADS; h++)
      for (int i = 0; i < len; i++) begin
        longint e [], sum, rc;
        logic [LANES*8-1:0] w;
        e = new[sel[h][i].size()]; sum = 0;
        foreach (e[t]) begin
          longint dot;
          dot = 0;
          for (int d = 0; d < DH; d++) dot += rows[0][h][i][d] * rows[1][h][sel[h][i][t]][d];
          e[t] = exp_fx((dot * longint'(rsqrt16(DH))) >>> 16);
          sum += e[t];
        end
        if (sum == 0) sum = 1;
        rc = (64'sd1 <<< 40) / sum;
        w = u_hbm.peek(aaddr(5, slot, 0, i, h));
        for (int d = 0; d < DH; d++) begin
          longint acc;
          int zr;
          acc = 0;
          foreach (e[t]) acc += e[t] * rows[2][h][sel[h][i][t]][d];
          zr = sat8(longint'((128'(acc) * 128'(rc)) >>> 40));
          checks++;
          if (int'($signed(w[d*8 +: 8])) != zr) begin
            failures++;
            if (failures < 10) $display("FAIL: head %0d row %0d lane %0d: %0d exp %0d", h, i, d, $signed(w[d*8 +: 8]), zr);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run_job(1, 9, 0);
    run_job(3, 2, 1);
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL: loader and fused loop never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
