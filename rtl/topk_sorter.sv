// topk_sorter: keeps the TOPK highest approximate scores of a stream, with their
// key indices, sorted in decreasing order (Stage 1, Top-k selection).
//
// The source uses a scalable merge sorter with an initiation interval of one; this
// design reaches the same rate with an insertion array: every slot compares the
// incoming score with its own, and the entries below the insertion point shift
// down by one, all in one cycle. Ties keep the earlier key first. A row begins
// with the first in_valid after done (or reset) and ends with in_last; one cycle
// later done pulses with out_idx (entry 0 in the low bits) and out_cnt =
// min(TOPK, keys seen).
module topk_sorter #(
  parameter int unsigned TOPK = lat_pkg::TOPK_DEF,
  parameter int unsigned SW   = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic                               in_last,
  input  logic signed [SW-1:0]               in_score,
  input  logic [lat_pkg::IDX_W-1:0]          in_idx,
  output logic                               done,
  output logic [TOPK*lat_pkg::IDX_W-1:0]     out_idx,
  output logic signed [SW-1:0]               out_score [TOPK],
  output logic [7:0]                         out_cnt
);
  logic signed [SW-1:0]          sc  [TOPK];
  logic [lat_pkg::IDX_W-1:0]     ix  [TOPK];
  logic [TOPK-1:0]               vld;
  logic                          fresh;   // next valid input starts a new row
  logic [TOPK-1:0]               beats;   // new entry ranks above slot t
  logic [TOPK-1:0]               beats_up; // ... and above slot t-1 (shift into t)

  always_comb begin
    for (int t = 0; t < TOPK; t++)
      beats[t] = ~vld[t] | (in_score > sc[t]);
    beats_up = {beats[TOPK-2:0], 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld   <= '0;
      fresh <= 1'b1;
      done  <= 1'b0;
      for (int t = 0; t < TOPK; t++) begin
        sc[t] <= '0;
        ix[t] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        if (fresh) begin
          vld   <= TOPK'(1);
          sc[0] <= in_score;
          ix[0] <= in_idx;
        end else begin
          for (int t = 0; t < TOPK; t++) begin
            if (beats_up[t]) begin          // below the insertion point: shift
              sc[t]  <= sc[(t == 0) ? 0 : t-1];
              ix[t]  <= ix[(t == 0) ? 0 : t-1];
              vld[t] <= vld[(t == 0) ? 0 : t-1];
            end else if (beats[t]) begin    // the insertion point
              sc[t]  <= in_score;
              ix[t]  <= in_idx;
              vld[t] <= 1'b1;
            end
          end
        end
        fresh <= in_last;
        done  <= in_last;
      end
    end
  end

  always_comb begin
    out_cnt = '0;
    for (int t = 0; t < TOPK; t++) begin
      out_idx[t*lat_pkg::IDX_W +: lat_pkg::IDX_W] = ix[t];
      out_score[t] = sc[t];
      out_cnt += 8'(vld[t]);
    end
  end
endmodule
