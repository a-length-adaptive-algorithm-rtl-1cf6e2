// stage1_mm_atsel: coarse-grained Stage 1, "MM | At-Sel". For one sequence of one
// layer it produces everything the attention stage needs:
//   1. MM: for each token r, the X row is read from HBM into the MatMul engine
//      and Q, K and V (all heads) are computed one projection after another. Each
//      finished head word is written back to HBM and, for Q and K, also passed
//      through the bits selector into on-chip code buffers (one QBITS-bit code per
//      element, N_HEADS x MAX_LEN rows each).
//   2. At-Sel: for each head and each query row i, the quantized query is scored
//      against every key of the sequence at one key per cycle (LUT multipliers),
//      the Top-k sorter keeps the TOPK best keys, and the index word (indices plus
//      count) is written to HBM for Stage 2.
// The MM-then-select order per sequence and the single HBM channel per stage are
// this design's choices. Job handshake: job_valid is taken when !busy; done pulses
// once when the sequence is finished. HBM read data arrives one cycle after
// rd_en; writes take effect in the cycle they are issued.
module stage1_mm_atsel #(
  parameter int unsigned LANES   = lat_pkg::LANES_DEF,
  parameter int unsigned D_MODEL = lat_pkg::D_MODEL_DEF,
  parameter int unsigned N_HEADS = lat_pkg::N_HEADS_DEF,
  parameter int unsigned MAX_LEN = lat_pkg::MAX_LEN_DEF,
  parameter int unsigned TOPK    = lat_pkg::TOPK_DEF,
  parameter int unsigned QBITS   = lat_pkg::QBITS_DEF,
  localparam int unsigned D_HEAD = LANES,
  localparam int unsigned XW     = D_MODEL / LANES,
  localparam int unsigned SW     = 2 * QBITS + 2 + $clog2(D_HEAD),
  localparam int unsigned LW     = $clog2(MAX_LEN)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        job_valid,
  input  lat_pkg::job_t               job,
  input  logic [15:0]                 qscale,
  output logic                        busy,
  output logic                        done,
  output logic                        rd_en,
  output logic [lat_pkg::ADDR_W-1:0]  rd_addr,
  input  logic [LANES*8-1:0]          rd_data,
  output logic                        wr_en,
  output logic [lat_pkg::ADDR_W-1:0]  wr_addr,
  output logic [LANES*8-1:0]          wr_data
);
  import lat_pkg::*;

  typedef enum logic [3:0] {IDLE, XLOAD, XWAIT, MMSTART, MMRUN, SELROW, SELRUN, SELWAIT, FIN} st_e;
  st_e st;

  job_t        jb;
  logic [11:0] r;          // token in MM, query row in At-Sel
  logic [11:0] kj;         // key being issued
  logic [4:0]  h;
  logic [5:0]  xw;
  logic [1:0]  m;          // 0 Q, 1 K, 2 V
  logic        x_pend;
  logic [5:0]  x_pend_w;

  // on-chip quantized Q and K
  logic [D_HEAD*QBITS-1:0] qcode [N_HEADS][MAX_LEN];
  logic [D_HEAD*QBITS-1:0] kcode [N_HEADS][MAX_LEN];

  // MatMul engine
  logic        mm_start, mm_busy, mm_done, mm_rd_en, mm_ov;
  logic [ADDR_W-1:0] mm_rd_addr;
  logic [11:0] mm_ocol;
  logic signed [7:0] mm_oval;
  logic        xw_en;
  logic [5:0]  xw_addr;
  logic [LANES*8-1:0] xw_data;

  mm_engine #(.LANES(LANES), .MAX_DIN(D_MODEL)) u_mm (
    .clk, .rst_n, .xw_en, .xw_bank(1'b0), .xw_addr, .xw_data,
    .start(mm_start), .bank(1'b0), .din_words(7'(XW)), .col0(12'd0), .ncols(13'(D_MODEL)),
    .layer(jb.layer), .matrix(matrix_e'({1'b0, m})), .busy(mm_busy), .done(mm_done),
    .rd_en(mm_rd_en), .rd_addr(mm_rd_addr), .rd_data,
    .o_valid(mm_ov), .o_col(mm_ocol), .o_val(mm_oval));

  // word assembly and quantization of MM results
  logic [LANES*8-1:0]     wacc, wnext;
  logic [D_HEAD*QBITS-1:0] wcode;
  assign wnext = {mm_oval, wacc[LANES*8-1:8]};
  bits_selector #(.LANES(LANES), .QBITS(QBITS)) u_bsel (.x(wnext), .scale(qscale), .code(wcode));

  // At-Sel datapath
  logic        as_in_valid, as_in_last, as_ov, as_ol, tk_done;
  logic [D_HEAD*QBITS-1:0] q_reg, k_reg;
  logic [IDX_W-1:0] as_idx_in, as_idx;
  logic signed [SW-1:0] as_score;
  logic [TOPK*IDX_W-1:0] tk_idx;
  logic signed [SW-1:0] tk_score [TOPK];
  logic [7:0] tk_cnt;

  at_sel_unit #(.D_HEAD(D_HEAD), .QBITS(QBITS)) u_atsel (
    .clk, .rst_n, .in_valid(as_in_valid), .in_last(as_in_last), .q_code(q_reg), .k_code(k_reg),
    .k_idx(as_idx_in), .out_valid(as_ov), .out_last(as_ol), .score(as_score), .out_idx(as_idx));

  topk_sorter #(.TOPK(TOPK), .SW(SW)) u_topk (
    .clk, .rst_n, .in_valid(as_ov), .in_last(as_ol), .in_score(as_score), .in_idx(as_idx),
    .done(tk_done), .out_idx(tk_idx), .out_score(tk_score), .out_cnt(tk_cnt));

  // the HBM read channel belongs to the engine during MMRUN
  logic        s_rd_en;
  logic [ADDR_W-1:0] s_rd_addr;
  assign rd_en   = (st == MMRUN) ? mm_rd_en   : s_rd_en;
  assign rd_addr = (st == MMRUN) ? mm_rd_addr : s_rd_addr;
  assign busy    = (st != IDLE);
  // key kj-1 sits in k_reg during SELRUN
  assign as_in_valid = (st == SELRUN) && (kj != 0);
  assign as_in_last  = (kj == jb.len);
  assign as_idx_in   = IDX_W'(kj - 1'b1);

  // code-buffer writes (kept apart from the FSM so the memories stay simple)
  always_ff @(posedge clk) begin
    if (mm_ov && mm_ocol[$clog2(LANES)-1:0] == ($clog2(LANES))'(LANES - 1)) begin
      if (m == 2'd0) qcode[mm_ocol[11:$clog2(LANES)]][r[LW-1:0]] <= wcode;
      if (m == 2'd1) kcode[mm_ocol[11:$clog2(LANES)]][r[LW-1:0]] <= wcode;
    end
    k_reg <= kcode[h][kj[LW-1:0]];
    q_reg <= (st == SELROW) ? qcode[h][r[LW-1:0]] : q_reg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; jb <= '0; r <= '0; kj <= '0; h <= '0; xw <= '0; m <= '0;
      x_pend <= 1'b0; x_pend_w <= '0; s_rd_en <= 1'b0; s_rd_addr <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0; done <= 1'b0; mm_start <= 1'b0;
      xw_en <= 1'b0; xw_addr <= '0; xw_data <= '0; wacc <= '0;
    end else begin
      s_rd_en <= 1'b0; wr_en <= 1'b0; done <= 1'b0; mm_start <= 1'b0; xw_en <= 1'b0;
      // X words returning from HBM go into the engine's input bank
      x_pend <= s_rd_en && (st == XLOAD || st == XWAIT);
      x_pend_w <= xw;
      if (x_pend) begin
        xw_en <= 1'b1; xw_addr <= x_pend_w - 1'b1; xw_data <= rd_data;
      end
      // MM results: assemble words, write each finished head word
      if (mm_ov) begin
        wacc <= wnext;
        if (mm_ocol[$clog2(LANES)-1:0] == ($clog2(LANES))'(LANES - 1)) begin
          wr_en   <= 1'b1;
          wr_addr <= act_addr(region_e'(3'd1 + 3'(m)), jb.slot, 5'(mm_ocol[11:$clog2(LANES)]), r, 6'd0);
          wr_data <= wnext;
        end
      end
      case (st)
        IDLE: if (job_valid) begin
          jb <= job; r <= '0; xw <= '0; st <= XLOAD;
        end
        XLOAD: begin
          s_rd_en   <= 1'b1;
          s_rd_addr <= act_addr(R_X, jb.slot, 5'd0, r, xw);
          xw <= xw + 1'b1;
          if (32'(xw) == XW - 1) st <= XWAIT;
        end
        XWAIT: if (!x_pend && !xw_en && !s_rd_en) begin m <= '0; st <= MMSTART; end
        MMSTART: begin mm_start <= 1'b1; st <= MMRUN; end
        MMRUN: if (mm_done) begin
          if (m == 2'd2) begin
            m <= '0;
            if (r == jb.len - 1'b1) begin r <= '0; h <= '0; st <= SELROW; end
            else begin r <= r + 1'b1; xw <= '0; st <= XLOAD; end
          end else begin
            m <= m + 1'b1; st <= MMSTART;
          end
        end
        SELROW: begin kj <= '0; st <= SELRUN; end   // q_reg loads this cycle
        SELRUN: begin
          // k_reg holds key kj-1 (read last cycle)
          if (kj == jb.len) st <= SELWAIT;
          else kj <= kj + 1'b1;
        end
        SELWAIT: if (tk_done) begin
          wr_en   <= 1'b1;
          wr_addr <= act_addr(R_TK, jb.slot, h, r, 6'd0);
          wr_data <= '0;
          wr_data[TOPK*IDX_W-1:0] <= tk_idx;
          wr_data[LANES*8-1 -: 8] <= tk_cnt;
          if (r == jb.len - 1'b1) begin
            r <= '0;
            if (32'(h) == N_HEADS - 1) st <= FIN;
            else begin h <= h + 1'b1; st <= SELROW; end
          end else begin
            r <= r + 1'b1; st <= SELROW;
          end
        end
        FIN: begin done <= 1'b1; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
