// tb_stage3: Stage 3 (FdFwd) alone on one HBM channel, at a reduced size. The
// testbench writes random X and Z rows, runs two jobs and compares every element
// of the result written over X against the reference
//   Y = LN(sat8(Z Wo) + X),  F = LN(sat8(GELU(Y W1) W2) + Y)
// built from the generated weights, gelu_fx and the integer layer norm of the
// reference package.
module tb_stage3;
  import tb_ref_pkg::*;
  import lat_pkg::*;
  localparam int LANES = 8, D_MODEL = 16, D_FF = 32;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, job_valid = 1'b0, busy, done;
  job_t job = '0;
  logic rd_en, wr_en;
  logic [31:0] rd_addr, wr_addr;
  logic [LANES*8-1:0] rd_data, wr_data;
  logic hbm_rd_en [1], hbm_wr_en [1];
  logic [31:0] hbm_rd_addr [1], hbm_wr_addr [1];
  logic [LANES*8-1:0] hbm_rd_data [1], hbm_wr_data [1];

  stage3_ffn #(.LANES(LANES), .D_MODEL(D_MODEL), .D_FF(D_FF)) dut (.*);
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

  function automatic void mm(ref int xin [], input int din, input int layer, input int m,
                             input int ncols, ref int out []);
    out = new[ncols];
    for (int c = 0; c < ncols; c++) begin
      longint acc;
      acc = 0;
      for (int k = 0; k < din; k++) acc += longint'(xin[k]) * weight(LANES, layer, m, k, c);
      out[c] = sat8(acc >>> 7);
    end
  endfunction

  task automatic run_job(int slot, int len, int layer);
    int xo [][];
    xo = new[len];
    for (int r = 0; r < len; r++) begin
      int x [], z [], a [], y [], g [], f [];
      x = new[D_MODEL]; z = new[D_MODEL];
      for (int w = 0; w < D_MODEL / LANES; w++) begin
        logic [LANES*8-1:0] wx, wz;
        for (int l = 0; l < LANES; l++) begin
          x[w*LANES+l] = int'($urandom % 97) - 48;
          wx[l*8 +: 8] = 8'(x[w*LANES+l]);
        end
        u_hbm.poke(aaddr(0, slot, 0, r, w), wx);
      end
      for (int h = 0; h < D_MODEL / LANES; h++) begin
        logic [LANES*8-1:0] wz;
        for (int l = 0; l < LANES; l++) begin
          z[h*LANES+l] = int'($urandom % 97) - 48;
          wz[l*8 +: 8] = 8'(z[h*LANES+l]);
        end
        u_hbm.poke(aaddr(5, slot, 0, r, h), wz);
      end
      mm(z, D_MODEL, layer, 3, D_MODEL, a);
      for (int c = 0; c < D_MODEL; c++) a[c] = sat8(a[c] + x[c]);
      layernorm(D_MODEL, a, y);
      mm(y, D_MODEL, layer, 4, D_FF, g);
      for (int c = 0; c < D_FF; c++) g[c] = gelu_fx(g[c]);
      mm(g, D_FF, layer, 5, D_MODEL, f);
      for (int c = 0; c < D_MODEL; c++) f[c] = sat8(f[c] + y[c]);
      layernorm(D_MODEL, f, xo[r]);
    end
    @(negedge clk);
    job = '{slot: 5'(slot), len: 12'(len), layer: 5'(layer)};
    job_valid = 1'b1; @(negedge clk); job_valid = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int r = 0; r < len; r++)
      for (int w = 0; w < D_MODEL / LANES; w++) begin
        logic [LANES*8-1:0] word;
        word = u_hbm.peek(aaddr(0, slot, 0, r, w));
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (int'($signed(word[l*8 +: 8])) != xo[r][w*LANES+l]) begin
            failures++;
            if (failures < 10) $display("FAIL: tok %0d elem %0d: %0d exp %0d", r, w*LANES+l,
                                        $signed(word[l*8 +: 8]), xo[r][w*LANES+l]);
          end
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    run_job(2, 5, 1);
    run_job(0, 3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
