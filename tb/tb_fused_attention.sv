// tb_fused_attention: Stage 2.2 reading a behavioural double-buffer bank (data
// one cycle after the address). For random q, K_s and V_s rows and random valid
// counts it checks every element of the exponent stream against
// exp_fx((q . k_j * rsqrt16(D_HEAD)) >>> 16) from the reference package, zero for
// masked slots, the value row that travels with it, e_last on the final slot,
// one r_done per row, and the row time of TOPK + 3 cycles.
module tb_fused_attention;
  import tb_ref_pkg::*;
  localparam int DH = 8, TOPK = 5, AW = $clog2(2 * TOPK + 1);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, r_ready = 1'b0, r_done;
  logic [7:0] r_meta = '0;
  logic [AW-1:0] ra_addr, rb_addr;
  logic [DH*8-1:0] ra_data = '0, rb_data = '0, e_v;
  logic e_valid, e_last;
  logic [23:0] e_val;
  logic [DH*8-1:0] mem [2*TOPK+1];
  int n_done = 0, cyc = 0;

  fused_attention #(.D_HEAD(DH), .TOPK(TOPK)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    ra_data <= mem[ra_addr];
    rb_data <= mem[rb_addr];
    if (r_done) n_done++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 2 * TOPK + 1; i++) mem[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int row = 0; row < 50; row++) begin
      int cnt, t0, got, nd0, mag;
      longint ex [TOPK];
      mag = (row % 2) ? 128 : 24;
      cnt = (row % 4 == 0) ? 1 + int'($urandom % TOPK) : TOPK;
      for (int i = 0; i < 2 * TOPK + 1; i++)
        for (int l = 0; l < DH; l++) mem[i][l*8 +: 8] = 8'(int'($urandom % (2 * mag)) - mag);
      for (int j = 0; j < TOPK; j++) begin
        longint dot;
        dot = 0;
        for (int l = 0; l < DH; l++) dot += longint'($signed(mem[0][l*8 +: 8])) * $signed(mem[1+j][l*8 +: 8]);
        ex[j] = (j < cnt) ? exp_fx((dot * longint'(rsqrt16(DH))) >>> 16) : 0;
      end
      r_meta = 8'(cnt); r_ready = 1'b1; nd0 = n_done;
      start = 1'b1; t0 = cyc; @(negedge clk); start = 1'b0;
      got = 0;
      while (got < TOPK) begin
        @(posedge clk); #1;
        if (r_done) r_ready = 1'b0;
        if (e_valid) begin
          checks += 3;
          if (longint'(e_val) != ex[got]) begin
            failures++; $display("FAIL: row %0d slot %0d: e %0d exp %0d (cnt %0d)", row, got, e_val, ex[got], cnt);
          end
          if (e_v != mem[1 + TOPK + got]) begin failures++; $display("FAIL: row %0d slot %0d value row", row, got); end
          if (e_last != (got == TOPK - 1)) begin failures++; $display("FAIL: e_last at slot %0d", got); end
          got++;
        end
      end
      checks++;
      if (cyc - t0 != TOPK + 3) begin failures++; $display("FAIL: row %0d took %0d cycles", row, cyc - t0); end
      repeat (3) @(negedge clk);
      checks++;
      if (n_done != nd0 + 1 || busy) begin failures++; $display("FAIL: r_done count %0d / busy", n_done - nd0); end
      r_ready = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
