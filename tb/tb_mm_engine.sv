// tb_mm_engine: loads an input vector into one bank, runs a product over several
// weight columns streamed from an HBM model, and compares each output with
// sat8(sum x*w >>> 7). Checks the rate (one weight word per cycle: the last output
// comes ncols*din_words + 2 cycles after start) and that a second command using
// the other bank can start in the cycle of done.
module tb_mm_engine;
  import tb_ref_pkg::*;
  localparam int LANES = 8, MAX_DIN = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic xw_en = 0, xw_bank = 0, start = 0, bank = 0, busy, done, rd_en, o_valid;
  logic [5:0] xw_addr = 0;
  logic [LANES*8-1:0] xw_data = 0, rd_data;
  logic [6:0] din_words = 0;
  logic [12:0] ncols = 0;
  logic [31:0] rd_addr;
  logic [11:0] o_col;
  logic signed [7:0] o_val;
  int xv [2][MAX_DIN];
  int nout = 0, t_start = 0, t_done = 0;

  mm_engine #(.LANES(LANES), .MAX_DIN(MAX_DIN), .SHIFT(7)) dut (.clk, .rst_n, .xw_en, .xw_bank, .xw_addr,
    .xw_data, .start, .bank, .din_words, .col0(12'd5), .ncols, .layer(5'd2), .matrix(lat_pkg::M_W1),
    .busy, .done, .rd_en, .rd_addr, .rd_data, .o_valid, .o_col, .o_val);

  always @(posedge clk) if (rd_en) for (int l = 0; l < LANES; l++) rd_data[l*8 +: 8] <= 8'(wgen(rd_addr, l));

  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && o_valid) begin
    longint acc;
    int cur_bank, cur_dw;
    acc = 0;
    cur_bank = (nout < 6) ? 0 : 1;
    cur_dw   = (nout < 6) ? 4 : 2;
    for (int k = 0; k < cur_dw * LANES; k++) acc += xv[cur_bank][k] * weight(LANES, 2, 4, k, int'(o_col));
    checks++; nout++;
    if (int'(o_val) != sat8(acc >>> 7)) begin
      failures++; $display("FAIL: col %0d got %0d exp %0d", o_col, o_val, sat8(acc >>> 7));
    end
    if (done && nout == 6) t_done = cyc;
  end

  initial begin
    repeat (20000) @(posedge clk); failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load(int b, int words);
    for (int w = 0; w < words; w++) begin
      @(negedge clk);
      xw_en = 1; xw_bank = b[0]; xw_addr = 6'(w);
      for (int l = 0; l < LANES; l++) begin
        xv[b][w*LANES+l] = int'($urandom % 256) - 128;
        xw_data[l*8 +: 8] = 8'(xv[b][w*LANES+l]);
      end
    end
    @(negedge clk); xw_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load(0, 4);
    load(1, 2);
    @(negedge clk); start = 1; bank = 0; din_words = 7'd4; ncols = 13'd6; t_start = cyc;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    // next command issued right at done is accepted
    start = 1; bank = 1; din_words = 7'd2; ncols = 13'd3;
    @(negedge clk); start = 0;
    checks++;
    // start is raised half a cycle before the edge that takes it; the monitor sees
    // the last output one edge after it is driven
    if (t_done - t_start != 6 * 4 + 3) begin failures++; $display("FAIL: %0d cycles, expected %0d", t_done - t_start, 6*4+3); end
    wait (!done); wait (done); @(posedge clk); #1;
    checks++;
    if (nout != 9) begin failures++; $display("FAIL: %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
