// attn_normalize: Stage 2.3, Z_i = sum_j e_j * v_j / sum_j e_j for one query row.
//
// While the exponent stream of a row arrives (one candidate per cycle) D_HEAD
// accumulators collect e_j * v_j and one more collects the sum. On the row's last
// element the totals are copied to a holding stage, so the accumulators are free
// for the next row at once (the buffer between 2.2 and 2.3), and a bit-serial
// divider forms R = floor(2^40 / sum). Then z[d] = sat8((acc[d] * R) >>> 40), an
// int8 with four fraction bits, leaves as one word with z_valid. A row's result
// appears about 43 cycles after its last input; busy is high meanwhile, and a
// second row may not end before the first has left.
module attn_normalize #(
  parameter int unsigned D_HEAD = lat_pkg::D_HEAD_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 e_valid,
  input  logic                 e_last,
  input  logic [23:0]          e_val,
  input  logic [D_HEAD*8-1:0]  e_v,
  output logic                 busy,
  output logic                 z_valid,
  output logic [D_HEAD*8-1:0]  z
);
  logic signed [47:0] acc  [D_HEAD];
  logic signed [47:0] hold [D_HEAD];
  logic [31:0]        sum;
  logic               dv_start, dv_done, dv_busy;
  logic [47:0]        dv_q;
  logic [39:0]        den;

  seq_divider #(.NW(48), .DW(40)) u_div (.clk, .rst_n, .start(dv_start), .num(48'd1 << 40),
    .den(den), .busy(dv_busy), .done(dv_done), .quo(dv_q));

  assign busy = dv_busy | dv_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum <= '0; dv_start <= 1'b0; den <= '0; z_valid <= 1'b0; z <= '0;
      for (int d = 0; d < D_HEAD; d++) begin acc[d] <= '0; hold[d] <= '0; end
    end else begin
      dv_start <= 1'b0;
      z_valid  <= 1'b0;
      if (e_valid) begin
        logic [31:0] s;
        s = sum + 32'(e_val);
        for (int d = 0; d < D_HEAD; d++) begin
          logic signed [47:0] a;
          a = acc[d] + 48'($signed({1'b0, e_val})) * 48'($signed(e_v[d*8 +: 8]));
          if (e_last) begin hold[d] <= a; acc[d] <= '0; end
          else acc[d] <= a;
        end
        if (e_last) begin
          sum <= '0; den <= (s == 0) ? 40'd1 : 40'(s); dv_start <= 1'b1;
        end else begin
          sum <= s;
        end
      end
      if (dv_done) begin
        z_valid <= 1'b1;
        for (int d = 0; d < D_HEAD; d++)
          z[d*8 +: 8] <= lat_pkg::sat8(64'((96'(hold[d]) * 96'($signed({1'b0, dv_q}))) >>> 40));
      end
    end
  end
endmodule
