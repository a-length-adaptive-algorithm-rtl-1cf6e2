// tb_lat_full: the end-to-end test of tb_lat_top run on the accelerator at its
// default (BERT-base) size: hidden 768, 12 heads of 64, FFN 3072, Top-30, 64-lane
// HBM words. The batch is sized after the MRPC task on BERT-base: sequences of
// 53 tokens (the task's average length) and 86 tokens (its maximum), plus one of
// 12 tokens that is shorter than the Top-k list, given unsorted, through two
// encoder layers (the model has twelve; two already exercise the layer overlap).
// A batch of sequences of different lengths (given unsorted, some shorter and some
// longer than TOPK) runs through NLAY encoder layers. The HBM model holds synthetic
// weights and inputs; a sequential reference model computes the expected outputs
// from the documented fixed-point arithmetic and every output element is
// compared. The test also counts how often each scheduling and datapath mechanism
// happened (stages overlapping, the next layer entering Stage 1 while Stage 3
// still runs the previous one, batch reordering, candidate masking, Top-k dropping
// keys, double-buffer overlap in Stage 2) and fails a mechanism that never
// occurred. It checks that the pipelined run is shorter than the stages' busy
// time added up.
module tb_lat_full;
  import tb_ref_pkg::*;

  localparam int LANES = 64, D_MODEL = 768, N_HEADS = 12, D_FF = 3072, MAX_LEN = 1024, TOPK = 30;
  localparam int QBITS = 1, BATCH = 16, N_LAYERS = 12;
  localparam int NLAY = 2;
  localparam int NSEQ = 3;
  localparam int LENS [NSEQ] = '{53, 86, 12};
  localparam int D_HEAD = LANES;
  localparam int BW = $clog2(BATCH + 1);
  localparam int WATCHDOG = 100000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [BW-1:0] batch_cnt;
  logic [11:0] batch_len [BATCH];
  logic [4:0] num_layers;
  logic [31:0] busy_cycles [3], wait_cycles [3], total_cycles;
  logic hbm_rd_en [3], hbm_wr_en [3];
  logic [31:0] hbm_rd_addr [3], hbm_wr_addr [3];
  logic [LANES*8-1:0] hbm_rd_data [3], hbm_wr_data [3];

  lat_top dut (
    .clk, .rst_n, .start, .batch_cnt, .batch_len, .num_layers, .qscale(16'd0), .busy, .done,
    .busy_cycles, .wait_cycles, .total_cycles,
    .hbm_rd_en, .hbm_rd_addr, .hbm_rd_data, .hbm_wr_en, .hbm_wr_addr, .hbm_wr_data);

  hbm_model #(.NP(3), .LANES(LANES)) u_hbm (
    .clk, .rd_en(hbm_rd_en), .rd_addr(hbm_rd_addr), .rd_data(hbm_rd_data),
    .wr_en(hbm_wr_en), .wr_addr(hbm_wr_addr), .wr_data(hbm_wr_data));

  int checks = 0, failures = 0;
  int xs [NSEQ][][];     // reference activations [slot][token][element]
  int qs [NSEQ][][], zs [NSEQ][][];   // last layer's Q and Z rows

  // ---------------- reference model ----------------
  function automatic void mm(ref int xin [], input int din, input int layer, input int m,
                             input int ncols, ref int out []);
    out = new[ncols];
    for (int c = 0; c < ncols; c++) begin
      longint acc = 0;
      for (int k = 0; k < din; k++) acc += longint'(xin[k]) * weight(LANES, layer, m, k, c);
      out[c] = sat8(acc >>> 7);
    end
  endfunction

  function automatic void ref_layer(int s, int layer);
    int n = LENS[s];
    int q [][], k [][], v [][], z [][];
    q = new[n]; k = new[n]; v = new[n]; z = new[n];
    for (int r = 0; r < n; r++) begin
      int xr [];
      xr = xs[s][r];
      mm(xr, D_MODEL, layer, 0, D_MODEL, q[r]);
      mm(xr, D_MODEL, layer, 1, D_MODEL, k[r]);
      mm(xr, D_MODEL, layer, 2, D_MODEL, v[r]);
      z[r] = new[D_MODEL];
    end
    for (int h = 0; h < N_HEADS; h++) begin
      for (int i = 0; i < n; i++) begin
        int sc [], sel [], cnt;
        longint e [], sum, rc;
        sc = new[n];
        for (int j = 0; j < n; j++) begin
          sc[j] = 0;
          for (int d = 0; d < D_HEAD; d++)
            sc[j] += ((q[i][h*D_HEAD+d] < 0) ? -1 : 1) * ((k[j][h*D_HEAD+d] < 0) ? -1 : 1);
        end
        // Top-k: highest score first, lower index first among equals
        cnt = (n < TOPK) ? n : TOPK;
        sel = new[cnt];
        begin
          bit taken [];
          taken = new[n];
          for (int t = 0; t < cnt; t++) begin
            int b = -1;
            for (int j = 0; j < n; j++)
              if (!taken[j] && (b < 0 || sc[j] > sc[b])) b = j;
            taken[b] = 1; sel[t] = b;
          end
        end
        e = new[TOPK]; sum = 0;
        for (int t = 0; t < TOPK; t++) begin
          longint dot = 0;
          if (t < cnt) begin
            for (int d = 0; d < D_HEAD; d++) dot += q[i][h*D_HEAD+d] * k[sel[t]][h*D_HEAD+d];
            e[t] = exp_fx((dot * longint'(rsqrt16(D_HEAD))) >>> 16);
          end else e[t] = 0;
          sum += e[t];
        end
        if (sum == 0) sum = 1;
        rc = (64'sd1 <<< 40) / sum;
        for (int d = 0; d < D_HEAD; d++) begin
          longint acc = 0;
          for (int t = 0; t < cnt; t++) acc += e[t] * v[sel[t]][h*D_HEAD+d];
          z[i][h*D_HEAD+d] = sat8(longint'((128'(acc) * 128'(rc)) >>> 40));
        end
      end
    end
    qs[s] = q; zs[s] = z;
    for (int r = 0; r < n; r++) begin
      int a [], y [], g [], f [], o [];
      mm(z[r], D_MODEL, layer, 3, D_MODEL, a);
      for (int c = 0; c < D_MODEL; c++) a[c] = sat8(a[c] + xs[s][r][c]);
      layernorm(D_MODEL, a, y);
      mm(y, D_MODEL, layer, 4, D_FF, g);
      for (int c = 0; c < D_FF; c++) g[c] = gelu_fx(g[c]);
      mm(g, D_FF, layer, 5, D_MODEL, f);
      for (int c = 0; c < D_MODEL; c++) f[c] = sat8(f[c] + y[c]);
      layernorm(D_MODEL, f, o);
      xs[s][r] = o;
    end
  endfunction

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_layer_overlap = 0, n_mask = 0, n_drop = 0, n_pingpong = 0, n_reorder = 0;
  always @(posedge clk) if (rst_n && busy) begin
    if (int'(dut.u_s1.busy) + int'(dut.u_s2.busy) + int'(dut.u_s3.busy) >= 2) n_overlap++;
    if (dut.u_s1.busy && dut.u_s3.busy && dut.u_s1.jb.layer > dut.u_s3.jb.layer) n_layer_overlap++;
    if (dut.u_s2.u_fuse.d_valid && dut.u_s2.u_fuse.d_mask) n_mask++;
    if (dut.u_s1.tk_done && dut.u_s1.jb.len > TOPK) n_drop++;
    if (dut.u_s2.u_load.busy && dut.u_s2.u_fuse.busy) n_pingpong++;
  end

  task automatic check_mech(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism '%s' never happened", name); end
    else $display("mechanism %-28s happened %0d times", name, n);
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    num_layers = 5'(NLAY);
    batch_cnt  = BW'(NSEQ);
    for (int b = 0; b < BATCH; b++) batch_len[b] = (b < NSEQ) ? 12'(LENS[b]) : 12'd0;
    // inputs into HBM and into the reference
    for (int s = 0; s < NSEQ; s++) begin
      xs[s] = new[LENS[s]];
      for (int r = 0; r < LENS[s]; r++) begin
        xs[s][r] = new[D_MODEL];
        for (int w = 0; w < D_MODEL / LANES; w++) begin
          logic [LANES*8-1:0] word;
          for (int l = 0; l < LANES; l++) begin
            xs[s][r][w*LANES+l] = xgen(s, r, w*LANES+l);
            word[l*8 +: 8] = 8'(xs[s][r][w*LANES+l]);
          end
          u_hbm.poke(aaddr(0, s, 0, r, w), word);
        end
      end
    end
    for (int l = 0; l < NLAY; l++)
      for (int s = 0; s < NSEQ; s++) ref_layer(s, l);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    // sorted order must be by decreasing length
    for (int t = 0; t < NSEQ; t++) begin
      checks++;
      if (t > 0 && LENS[dut.order[t]] > LENS[dut.order[t-1]]) begin
        failures++; $display("FAIL: order[%0d] not sorted", t);
      end
      if (int'(dut.order[t]) != t) n_reorder++;
    end
    // last layer's Q rows (Stage 1) and Z rows (Stage 2), then the outputs
    for (int s = 0; s < NSEQ; s++)
      for (int r = 0; r < LENS[s]; r++)
        for (int h = 0; h < N_HEADS; h++) begin
          logic [LANES*8-1:0] wq, wz;
          wq = u_hbm.peek(aaddr(1, s, h, r, 0));
          wz = u_hbm.peek(aaddr(5, s, 0, r, h));
          for (int l = 0; l < LANES; l++) begin
            checks += 2;
            if (int'($signed(wq[l*8 +: 8])) != qs[s][r][h*LANES+l]) begin
              failures++;
              if (failures < 10) $display("FAIL: Q seq %0d tok %0d head %0d lane %0d: got %0d exp %0d",
                                          s, r, h, l, int'($signed(wq[l*8 +: 8])), qs[s][r][h*LANES+l]);
            end
            if (int'($signed(wz[l*8 +: 8])) != zs[s][r][h*LANES+l]) begin
              failures++;
              if (failures < 20) $display("FAIL: Z seq %0d tok %0d head %0d lane %0d: got %0d exp %0d",
                                          s, r, h, l, int'($signed(wz[l*8 +: 8])), zs[s][r][h*LANES+l]);
            end
          end
        end
    // outputs
    for (int s = 0; s < NSEQ; s++)
      for (int r = 0; r < LENS[s]; r++)
        for (int w = 0; w < D_MODEL / LANES; w++) begin
          logic [LANES*8-1:0] word;
          word = u_hbm.peek(aaddr(0, s, 0, r, w));
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (int'($signed(word[l*8 +: 8])) != xs[s][r][w*LANES+l]) begin
              failures++;
              if (failures < 10) $display("FAIL: seq %0d tok %0d elem %0d: got %0d exp %0d", s, r,
                                          w*LANES+l, int'($signed(word[l*8 +: 8])), xs[s][r][w*LANES+l]);
            end
          end
        end
    $display("cycles: total %0d, busy %0d/%0d/%0d, waiting %0d/%0d/%0d", total_cycles,
             busy_cycles[0], busy_cycles[1], busy_cycles[2], wait_cycles[0], wait_cycles[1], wait_cycles[2]);
    checks++;
    if (total_cycles >= busy_cycles[0] + busy_cycles[1] + busy_cycles[2]) begin
      failures++; $display("FAIL: no time saved by the coarse-grained pipeline");
    end
    check_mech("stages overlapping", n_overlap);
    check_mech("next layer overlapping", n_layer_overlap);
    check_mech("batch reordered by length", n_reorder);
    check_mech("candidate masked", n_mask);
    check_mech("Top-k dropping keys", n_drop);
    check_mech("Stage 2 double buffering", n_pingpong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
