// mm_engine: the linear-transformation (MatMul) unit of Stage 1 (Q, K, V
// projections) and Stage 3 (output projection and the two feed-forward layers).
//
// It computes, for one input vector x held on chip and ncols consecutive weight
// columns c, out[c] = sat8((sum_k x[k] * W[k][c]) >>> SHIFT). Weight columns are
// streamed from HBM, one word of LANES int8 weights per cycle, so LANES
// multiply-accumulates happen each cycle and a column of din_words words takes
// din_words cycles; the stream runs back to back across columns.
// The input vector lives in one of two banks (xw_* writes a bank while the
// other is used), so the next vector can be assembled during a product.
// Timing: start (one cycle, taken when !busy, which is already the case in the
// cycle of the previous command's done) -> rd_en every cycle for
// ncols*din_words cycles; rd_data must arrive one cycle after rd_en; o_valid
// pulses per column two cycles after its last read; done pulses with the last one.
// The fixed one-word-per-cycle rate and the shift are this design's choices.
module mm_engine #(
  parameter int unsigned LANES   = lat_pkg::LANES_DEF,
  parameter int unsigned MAX_DIN = lat_pkg::D_FF_DEF,
  parameter int unsigned SHIFT   = 7,
  localparam int unsigned WORDS  = MAX_DIN / LANES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // input-vector bank write
  input  logic                        xw_en,
  input  logic                        xw_bank,
  input  logic [5:0]                  xw_addr,
  input  logic [LANES*8-1:0]          xw_data,
  // command
  input  logic                        start,
  input  logic                        bank,
  input  logic [6:0]                  din_words,
  input  logic [11:0]                 col0,
  input  logic [12:0]                 ncols,
  input  logic [4:0]                  layer,
  input  lat_pkg::matrix_e            matrix,
  output logic                        busy,
  output logic                        done,
  // weight read channel
  output logic                        rd_en,
  output logic [lat_pkg::ADDR_W-1:0]  rd_addr,
  input  logic [LANES*8-1:0]          rd_data,
  // results
  output logic                        o_valid,
  output logic [11:0]                 o_col,
  output logic signed [7:0]           o_val
);
  logic [LANES*8-1:0] xbuf [2][WORDS];

  always_ff @(posedge clk) begin
    if (xw_en) xbuf[xw_bank][xw_addr[$clog2(WORDS)-1:0]] <= xw_data;
  end

  // issue side
  logic        cbank;
  logic [6:0]  nw;
  logic [11:0] col, col_end;
  logic [4:0]  lay;
  lat_pkg::matrix_e mat;
  logic [5:0]  w;
  // pipeline registers for the word that returns next cycle
  logic        p_valid, p_last;
  logic [11:0] p_col;
  logic [LANES*8-1:0] p_x;
  logic signed [47:0] acc;

  assign rd_addr = lat_pkg::w_addr(lay, mat, col, w);
  assign busy    = rd_en | p_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_en <= 1'b0; cbank <= 1'b0; nw <= '0; col <= '0; col_end <= '0;
      lay <= '0; mat <= lat_pkg::M_WQ; w <= '0;
    end else if (start && !busy) begin
      rd_en <= 1'b1; cbank <= bank; nw <= din_words; col <= col0;
      col_end <= 12'(col0 + ncols - 1'b1); lay <= layer; mat <= matrix; w <= '0;
    end else if (rd_en) begin
      if (7'(w) == nw - 1'b1) begin
        w <= '0;
        if (col == col_end) rd_en <= 1'b0;
        else col <= col + 1'b1;
      end else begin
        w <= w + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0; p_last <= 1'b0; p_col <= '0; p_x <= '0; acc <= '0;
      o_valid <= 1'b0; o_col <= '0; o_val <= '0; done <= 1'b0;
    end else begin
      p_valid <= rd_en;
      p_last  <= rd_en && (7'(w) == nw - 1'b1);
      p_col   <= col;
      p_x     <= xbuf[cbank][w[$clog2(WORDS)-1:0]];
      o_valid <= 1'b0;
      done    <= 1'b0;
      if (p_valid) begin
        logic signed [47:0] s;
        s = acc;
        for (int l = 0; l < LANES; l++)
          s += 48'($signed(p_x[l*8 +: 8])) * 48'($signed(rd_data[l*8 +: 8]));
        if (p_last) begin
          acc     <= '0;
          o_valid <= 1'b1;
          o_col   <= p_col;
          o_val   <= lat_pkg::sat8(64'(s >>> SHIFT));
          done    <= !rd_en;
        end else begin
          acc <= s;
        end
      end
    end
  end
endmodule
