// pingpong_buffer: the double buffer between the data-loading sub-stage (2.1)
// and the fused attention sub-stage (2.2) of Stage 2.
//
// Two banks of DEPTH words, each with a small side-band word (META_W bits, here
// the number of valid candidates). The producer writes the bank selected by its
// own pointer while w_ready is high, then pulses w_done with the meta word: the
// bank becomes full and the producer moves to the other bank. The consumer sees
// r_ready when its bank is full, reads it through two independent read ports
// (data one cycle after the address) and frees it with r_done. Producer and
// consumer thus work on different banks at the same time.
module pingpong_buffer #(
  parameter int unsigned DEPTH  = 2 * lat_pkg::TOPK_DEF + 1,
  parameter int unsigned WIDTH  = lat_pkg::LANES_DEF * 8,
  parameter int unsigned META_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // producer
  output logic              w_ready,
  input  logic              w_en,
  input  logic [AW-1:0]     w_addr,
  input  logic [WIDTH-1:0]  w_data,
  input  logic              w_done,
  input  logic [META_W-1:0] w_meta,
  // consumer
  output logic              r_ready,
  output logic [META_W-1:0] r_meta,
  input  logic [AW-1:0]     ra_addr,
  output logic [WIDTH-1:0]  ra_data,
  input  logic [AW-1:0]     rb_addr,
  output logic [WIDTH-1:0]  rb_data,
  input  logic              r_done
);
  logic [WIDTH-1:0]  mem  [2][DEPTH];
  logic [META_W-1:0] meta [2];
  logic [1:0]        full;
  logic              wsel, rsel;

  assign w_ready = !full[wsel];
  assign r_ready = full[rsel];
  assign r_meta  = meta[rsel];

  always_ff @(posedge clk) begin
    if (w_en) mem[wsel][w_addr] <= w_data;
    ra_data <= mem[rsel][ra_addr];
    rb_data <= mem[rsel][rb_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; meta[0] <= '0; meta[1] <= '0;
    end else begin
      if (w_done && w_ready) begin
        full[wsel] <= 1'b1;
        meta[wsel] <= w_meta;
        wsel       <= ~wsel;
      end
      if (r_done && r_ready) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  // A write or a completion while the producer's bank is still full is a
  // protocol error of the producer.
  assert property (@(posedge clk) disable iff (!rst_n) (w_en || w_done) |-> w_ready)
    else $error("pingpong_buffer: write into a full bank");
endmodule
