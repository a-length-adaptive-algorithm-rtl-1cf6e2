// fused_attention: Stage 2.2, the fused attention loop. For one query row it runs
// one loop over the TOPK candidate slots that, per slot j, computes the exact
// score q . k_j (all D_HEAD lanes at once, i.e. unroll factor p = D_HEAD), scales
// it by 1/sqrt(D_HEAD), masks it (slots at or beyond the valid count give 0) and
// takes the exponent, so that scores never leave the pipeline. The exponent e_j
// leaves together with the value row v_j for the normalization sub-stage.
// Formats: q, k int8 with four fraction bits; the scaled score has eight
// fraction bits; e_j is unsigned with twelve fraction bits.
// Timing: start when the double buffer has a full bank (r_ready); the loop
// issues one slot per cycle and e_valid follows each read by two cycles, so a row
// takes TOPK + 3 cycles; e_last marks slot TOPK-1 and the bank is freed then.
module fused_attention #(
  parameter int unsigned D_HEAD = lat_pkg::D_HEAD_DEF,
  parameter int unsigned TOPK   = lat_pkg::TOPK_DEF,
  localparam int unsigned AW    = $clog2(2 * TOPK + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  // double-buffer consumer side
  input  logic                   r_ready,
  input  logic [7:0]             r_meta,
  output logic [AW-1:0]          ra_addr,
  input  logic [D_HEAD*8-1:0]    ra_data,
  output logic [AW-1:0]          rb_addr,
  input  logic [D_HEAD*8-1:0]    rb_data,
  output logic                   r_done,
  // exponent stream
  output logic                   e_valid,
  output logic                   e_last,
  output logic [23:0]            e_val,
  output logic [D_HEAD*8-1:0]    e_v
);
  localparam logic [31:0] RSQ = 32'(lat_pkg::rsqrt16(D_HEAD));

  typedef enum logic [1:0] {IDLE, QLOAD, LOOP, DRAIN} st_e;
  st_e st;
  logic [7:0]          cnt, j;
  logic [D_HEAD*8-1:0] q;
  logic                d_valid, d_last, d_mask;   // slot whose rows return now
  logic signed [23:0]  dot, scaled;
  logic signed [47:0]  sc48;
  logic [23:0]         ex;

  assign busy = (st != IDLE);

  always_comb begin
    dot = '0;
    for (int l = 0; l < D_HEAD; l++)
      dot += 24'($signed(q[l*8 +: 8])) * 24'($signed(ra_data[l*8 +: 8]));
    sc48   = 48'(dot) * $signed({16'd0, RSQ});
    scaled = 24'(sc48 >>> 16);
  end

  exp_unit u_exp (.x(scaled), .y(ex));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; cnt <= '0; j <= '0; q <= '0; ra_addr <= '0; rb_addr <= '0; r_done <= 1'b0;
      d_valid <= 1'b0; d_last <= 1'b0; d_mask <= 1'b0;
      e_valid <= 1'b0; e_last <= 1'b0; e_val <= '0; e_v <= '0;
    end else begin
      r_done <= 1'b0;
      d_valid <= 1'b0; d_last <= 1'b0;
      e_valid <= d_valid; e_last <= d_last;
      if (d_valid) begin
        e_val <= d_mask ? 24'd0 : ex;   // masked slot contributes nothing
        e_v   <= rb_data;
      end
      case (st)
        IDLE: if (start && r_ready) begin
          cnt <= r_meta; ra_addr <= '0; st <= QLOAD;
        end
        QLOAD: begin                     // q arrives next cycle; start the loop
          ra_addr <= AW'(1);
          rb_addr <= AW'(1 + TOPK);
          j <= '0;
          st <= LOOP;
        end
        LOOP: begin
          if (j == 0) q <= ra_data;      // q read in QLOAD is on ra_data now
          // slot j's address was presented last cycle, its data comes next cycle
          d_valid <= 1'b1;
          d_last  <= (32'(j) == TOPK - 1);
          d_mask  <= (j >= cnt);
          if (32'(j) == TOPK - 1) begin
            st <= DRAIN;
          end else begin
            ra_addr <= AW'(2 + 32'(j));
            rb_addr <= AW'(2 + 32'(j) + TOPK);
          end
          j <= j + 1'b1;
        end
        DRAIN: if (!d_valid) begin
          r_done <= 1'b1; st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
