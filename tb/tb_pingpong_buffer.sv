// tb_pingpong_buffer: the producer fills bank after bank with tagged words while
// the consumer, slower, drains them through both read ports. Checks the data
// and meta word of every bank, that the producer is held off (w_ready low) when
// both banks are full, that the consumer sees r_ready only for full banks, and
// that producer and consumer were active in the same cycle (the point of the
// double buffer).
module tb_pingpong_buffer;
  localparam int DEPTH = 7, WIDTH = 16, META_W = 8, AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_ready, w_en = 1'b0, w_done = 1'b0, r_ready, r_done = 1'b0;
  logic [AW-1:0] w_addr = '0, ra_addr = '0, rb_addr = '0;
  logic [WIDTH-1:0] w_data = '0, ra_data, rb_data;
  logic [META_W-1:0] w_meta = '0, r_meta;
  int overlap = 0, held = 0;
  logic wbusy = 1'b0, rbusy = 1'b0;

  pingpong_buffer #(.DEPTH(DEPTH), .WIDTH(WIDTH), .META_W(META_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (wbusy && rbusy) overlap++;

  function automatic logic [WIDTH-1:0] word(int blk, int a);
    return 16'(blk * 256 + a * 17 + 3);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NBLK = 12;

  // producer
  initial begin
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int b = 0; b < NBLK; b++) begin
      while (!w_ready) begin held++; @(negedge clk); end
      wbusy = 1'b1;
      for (int a = 0; a < DEPTH; a++) begin
        w_en = 1'b1; w_addr = AW'(a); w_data = word(b, a); @(negedge clk);
      end
      w_en = 1'b0; w_done = 1'b1; w_meta = 8'(b + 1); @(negedge clk);
      w_done = 1'b0; wbusy = 1'b0;
    end
  end

  // consumer: three cycles per word pair to be slower than the producer
  initial begin
    @(posedge rst_n);
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      while (!r_ready) @(negedge clk);
      rbusy = 1'b1;
      checks++;
      if (r_meta != 8'(b + 1)) begin failures++; $display("FAIL: meta %0d exp %0d", r_meta, b + 1); end
      for (int a = 0; a < DEPTH; a++) begin
        ra_addr = AW'(a); rb_addr = AW'(DEPTH - 1 - a);
        @(negedge clk);
        checks += 2;
        if (ra_data != word(b, a)) begin failures++; $display("FAIL: blk %0d a %0d: %h", b, a, ra_data); end
        if (rb_data != word(b, DEPTH - 1 - a)) begin failures++; $display("FAIL: blk %0d b %0d", b, DEPTH - 1 - a); end
        repeat (2) @(negedge clk);
      end
      r_done = 1'b1; @(negedge clk); r_done = 1'b0; rbusy = 1'b0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (r_ready || !w_ready) begin failures++; $display("FAIL: buffer not empty at end"); end
    checks++;
    if (held == 0) begin failures++; $display("FAIL: producer was never held off"); end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL: producer and consumer never overlapped"); end
    $display("producer held %0d cycles, overlap %0d cycles", held, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
