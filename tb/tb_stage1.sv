// tb_stage1: Stage 1 (MM | At-Sel) alone on one HBM channel, at a reduced size.
// Two jobs: a sequence longer than TOPK (keys are dropped) and one shorter (the
// index word carries a count below TOPK), in different slots and layers. The
// reference computes Q, K, V = sat8(X W >>> 7) from the generated weights, the
// 1-bit sign scores sum_d sgn(q_d) sgn(k_d), and the Top-k list (highest score
// first, the lower key index first on a tie). Every Q, K, V element and every
// index word is compared.
module tb_stage1;
  import tb_ref_pkg::*;
  import lat_pkg::*;
  localparam int LANES = 8, D_MODEL = 16, N_HEADS = 2, MAX_LEN = 16, TOPK = 3, QBITS = 1;
  localparam int DH = LANES;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, job_valid = 1'b0, busy, done;
  job_t job = '0;
  logic rd_en, wr_en;
  logic [31:0] rd_addr, wr_addr;
  logic [LANES*8-1:0] rd_data, wr_data;
  logic hbm_rd_en [1], hbm_wr_en [1];
  logic [31:0] hbm_rd_addr [1], hbm_wr_addr [1];
  logic [LANES*8-1:0] hbm_rd_data [1], hbm_wr_data [1];

  stage1_mm_atsel #(.LANES(LANES), .D_MODEL(D_MODEL), .N_HEADS(N_HEADS), .MAX_LEN(MAX_LEN),
                    .TOPK(TOPK), .QBITS(QBITS)) dut (.clk, .rst_n, .job_valid, .job,
    .qscale(16'd0), .busy, .done, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);
  hbm_model #(.NP(1), .LANES(LANES)) u_hbm (.clk, .rd_en(hbm_rd_en), .rd_addr(hbm_rd_addr),
    .rd_data(hbm_rd_data), .wr_en(hbm_wr_en), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));
  assign hbm_rd_en[0] = rd_en;  assign hbm_rd_addr[0] = rd_addr;  assign rd_data = hbm_rd_data[0];
  assign hbm_wr_en[0] = wr_en;  assign hbm_wr_addr[0] = wr_addr;  assign hbm_wr_data[0] = wr_data;

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_job(int slot, int len, int layer);
    int x [][], qkv [3][][];
    x = new[len];
    for (int r = 0; r < len; r++) begin
      x[r] = new[D_MODEL];
      for (int w = 0; w < D_MODEL / LANES; w++) begin
        logic [LANES*8-1:0] word;
        for (int l = 0; l < LANES; l++) begin
          x[r][w*LANES+l] = xgen(slot + 7 * layer, r, w*LANES+l);
          word[l*8 +: 8] = 8'(x[r][w*LANES+l]);
        end
        u_hbm.poke(aaddr(0, slot, 0, r, w), word);
      end
    end
    for (int m = 0; m < 3; m++) begin
      qkv[m] = new[len];
      for (int r = 0; r < len; r++) begin
        qkv[m][r] = new[D_MODEL];
        for (int c = 0; c < D_MODEL; c++) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < D_MODEL; k++) acc += longint'(x[r][k]) * weight(LANES, layer, m, k, c);
          qkv[m][r][c] = sat8(acc >>> 7);
        end
      end
    end
    @(negedge clk);
    job = '{slot: 5'(slot), len: 12'(len), layer: 5'(layer)};
    job_valid = 1'b1; @(negedge clk); job_valid = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int m = 0; m < 3; m++)
      for (int r = 0; r < len; r++)
        for (int h = 0; h < N_HEADS; h++) begin
          logic [LANES*8-1:0] w;
          w = u_hbm.peek(aaddr(1 + m, slot, h, r, 0));
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (int'($signed(w[l*8 +: 8])) != qkv[m][r][h*DH+l]) begin
              failures++;
              if (failures < 10) $display("FAIL: m %0d tok %0d head %0d lane %0d: %0d exp %0d", m, r, h, l,
                                          $signed(w[l*8 +: 8]), qkv[m][r][h*DH+l]);
            end
          end
        end
    for (int h = 0; h < N_HEADS; h++)
      for (int i = 0; i < len; i++) begin
        int sc [], cnt;
        bit taken [];
        logic [LANES*8-1:0] w;
        sc = new[len]; taken = new[len];
        for (int j = 0; j < len; j++) begin
          sc[j] = 0;
          for (int d = 0; d < DH; d++)
            sc[j] += ((qkv[0][i][h*DH+d] < 0) ? -1 : 1) * ((qkv[1][j][h*DH+d] < 0) ? -1 : 1);
        end
        cnt = (len < TOPK) ? len : TOPK;
        w = u_hbm.peek(aaddr(4, slot, h, i, 0));
        checks++;
        if (int'(w[LANES*8-1 -: 8]) != cnt) begin failures++; $display("FAIL: count %0d exp %0d", w[LANES*8-1 -: 8], cnt); end
        for (int t = 0; t < cnt; t++) begin
          int b;
          b = -1;
          for (int j = 0; j < len; j++)
            if (!taken[j] && (b < 0 || sc[j] > sc[b])) b = j;
          taken[b] = 1'b1;
          checks++;
          if (int'(w[16*t +: 16]) != b) begin
            failures++;
            $display("FAIL: head %0d row %0d rank %0d: key %0d exp %0d", h, i, t, w[16*t +: 16], b);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run_job(2, 11, 1);
    run_job(0, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
