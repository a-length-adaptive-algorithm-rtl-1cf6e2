// at_sel_unit: approximate attention score of one query row against one key row
// per cycle (Stage 1, At-Sel, "candidate pre-selection").
//
// D_HEAD lut_mult instances multiply the query's and the key's quantized codes
// lane by lane and an adder tree sums them. The result and the key's index leave
// through one register stage, so the unit accepts a key every cycle (II = 1) with
// a latency of one cycle. in_last is passed along to mark a row's last key.
module at_sel_unit #(
  parameter int unsigned D_HEAD = lat_pkg::D_HEAD_DEF,
  parameter int unsigned QBITS  = lat_pkg::QBITS_DEF,
  localparam int unsigned SW    = 2 * QBITS + 2 + $clog2(D_HEAD)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_last,
  input  logic [D_HEAD*QBITS-1:0]      q_code,
  input  logic [D_HEAD*QBITS-1:0]      k_code,
  input  logic [lat_pkg::IDX_W-1:0]    k_idx,
  output logic                         out_valid,
  output logic                         out_last,
  output logic signed [SW-1:0]         score,
  output logic [lat_pkg::IDX_W-1:0]    out_idx
);
  logic signed [2*QBITS:0] prod [D_HEAD];
  logic signed [SW-1:0]    sum;

  for (genvar l = 0; l < D_HEAD; l++) begin : g_mul
    lut_mult #(.QBITS(QBITS)) u_mul (
      .a(q_code[l*QBITS +: QBITS]), .b(k_code[l*QBITS +: QBITS]), .p(prod[l]));
  end

  always_comb begin
    sum = '0;
    for (int l = 0; l < D_HEAD; l++) sum += SW'(prod[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      score     <= '0;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid & in_last;
      if (in_valid) begin
        score   <= sum;
        out_idx <= k_idx;
      end
    end
  end
endmodule
