// layernorm_unit: layer normalization of one token row (Stage 3, used twice per
// token: after the attention output projection and after the feed-forward).
//
// Elements arrive one per cycle (in_valid, any order, each index once); the unit
// keeps the row and accumulates s1 = sum x and s2 = sum x^2 on the way in. On
// start it forms the integer variance numerator V = D*s2 - s1^2, takes
// r = floor(sqrt(V)) with a bit-serial square root and R = floor(2^40 / r) with a
// bit-serial divider, then streams out, one element per cycle in index order,
//   y[i] = sat8((16 * (D*x[i] - s1) * R) >>> 40)
// which is (x - mean)/std with four fraction bits. The learnable gain and bias are
// taken as 1 and 0 (this design's simplification). Latency from start to the first
// output is about 75 cycles; done pulses with the last output, after which the
// accumulators are cleared for the next row.
module layernorm_unit #(
  parameter int unsigned D = lat_pkg::D_MODEL_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [11:0]           in_idx,
  input  logic signed [7:0]     in_val,
  input  logic                  start,
  output logic                  busy,
  output logic                  o_valid,
  output logic [11:0]           o_idx,
  output logic signed [7:0]     o_val,
  output logic                  done
);
  typedef enum logic [2:0] {IDLE, SQRT, DIV, OUT} st_e;
  st_e st;

  logic signed [7:0]  row [D];
  logic signed [31:0] s1;
  logic [47:0]        s2;
  logic [11:0]        i;
  logic               sq_start, sq_done, dv_start, dv_done, dv_busy;
  logic [23:0]        sq_r;
  logic [47:0]        dv_q, recip;
  logic [47:0]        vnum;

  assign vnum = 48'(D) * s2 - 48'(s1) * 48'(s1);

  seq_isqrt #(.W(48)) u_sqrt (.clk, .rst_n, .start(sq_start), .v(vnum), .done(sq_done), .r(sq_r));
  seq_divider #(.NW(48), .DW(40)) u_div (.clk, .rst_n, .start(dv_start), .num(48'd1 << 40),
    .den((sq_r == 0) ? 40'd1 : 40'(sq_r)), .busy(dv_busy), .done(dv_done), .quo(dv_q));

  assign busy = (st != IDLE);

  always_ff @(posedge clk) begin
    if (in_valid) row[in_idx] <= in_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; s1 <= '0; s2 <= '0; i <= '0; sq_start <= 1'b0; dv_start <= 1'b0;
      recip <= '0; o_valid <= 1'b0; o_idx <= '0; o_val <= '0; done <= 1'b0;
    end else begin
      sq_start <= 1'b0; dv_start <= 1'b0; o_valid <= 1'b0; done <= 1'b0;
      if (in_valid) begin
        s1 <= s1 + 32'(in_val);
        s2 <= s2 + 48'(32'(in_val) * 32'(in_val));
      end
      case (st)
        IDLE: if (start) begin st <= SQRT; sq_start <= 1'b1; end
        SQRT: if (sq_done) begin st <= DIV; dv_start <= 1'b1; end
        DIV:  if (dv_done) begin st <= OUT; recip <= dv_q; i <= '0; end
        OUT: begin
          logic signed [63:0] dev;
          dev = 64'(D) * 64'(row[i]) - 64'(s1);
          o_valid <= 1'b1;
          o_idx   <= i;
          o_val   <= lat_pkg::sat8((dev * 64'sd16 * $signed({16'd0, recip})) >>> 40);
          if (32'(i) == D - 1) begin
            st <= IDLE; done <= 1'b1; s1 <= '0; s2 <= '0;
          end
          i <= i + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
