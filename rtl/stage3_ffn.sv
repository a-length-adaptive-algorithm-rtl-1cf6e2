// stage3_ffn: coarse-grained Stage 3, "FdFwd", for one sequence of one layer.
// Token by token it computes
//   Y = LN(X + Z * Wo)                (attention output projection, add, LN)
//   F = LN(Y + GELU(Y * W1) * W2)     (feed-forward, add, LN)
// and writes F over the token's X row in HBM, where it is the next layer's input.
// One mm_engine does the three products in turn; its two input banks let the
// next product's input vector be assembled while the current one runs (LN1
// output goes to bank 1 while bank 0 holds Z; GELU output goes to bank 0 while
// bank 1 holds Y). The residual inputs X and Y are kept on chip for the adds.
// One layernorm_unit is used twice per token. Placing Wo in this stage and the
// token-serial order are this design's choices. Job handshake as in the other
// stages.
module stage3_ffn #(
  parameter int unsigned LANES   = lat_pkg::LANES_DEF,
  parameter int unsigned D_MODEL = lat_pkg::D_MODEL_DEF,
  parameter int unsigned D_FF    = lat_pkg::D_FF_DEF,
  localparam int unsigned XW     = D_MODEL / LANES,
  localparam int unsigned FW     = D_FF / LANES,
  localparam int unsigned LB     = $clog2(LANES)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        job_valid,
  input  lat_pkg::job_t               job,
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

  typedef enum logic [3:0] {IDLE, LOAD, LWAIT, MO, LN1, M1, M2, LN2, FIN} st_e;
  st_e st;
  job_t jb;
  logic [11:0] r;
  logic [6:0]  li;                 // load word counter: X words then Z words
  logic        pend;
  logic [6:0]  pend_i;

  logic signed [7:0] xres [D_MODEL];
  logic signed [7:0] ybuf [D_MODEL];

  // engine
  logic mm_start, mm_bank, mm_busy, mm_done, mm_rd_en, mm_ov;
  logic [6:0] mm_dw;
  logic [12:0] mm_nc;
  matrix_e mm_mat;
  logic [ADDR_W-1:0] mm_rd_addr;
  logic [11:0] mm_ocol;
  logic signed [7:0] mm_oval;
  logic xw_en, xw_bank;
  logic [5:0] xw_addr;
  logic [LANES*8-1:0] xw_data;

  mm_engine #(.LANES(LANES), .MAX_DIN(D_FF)) u_mm (
    .clk, .rst_n, .xw_en, .xw_bank, .xw_addr, .xw_data,
    .start(mm_start), .bank(mm_bank), .din_words(mm_dw), .col0(12'd0), .ncols(mm_nc),
    .layer(jb.layer), .matrix(mm_mat), .busy(mm_busy), .done(mm_done),
    .rd_en(mm_rd_en), .rd_addr(mm_rd_addr), .rd_data,
    .o_valid(mm_ov), .o_col(mm_ocol), .o_val(mm_oval));

  // layer norm and GELU
  logic ln_in_valid, ln_start, ln_busy, ln_ov, ln_done;
  logic [11:0] ln_in_idx, ln_oidx;
  logic signed [7:0] ln_in_val, ln_oval, g_val;

  layernorm_unit #(.D(D_MODEL)) u_ln (
    .clk, .rst_n, .in_valid(ln_in_valid), .in_idx(ln_in_idx), .in_val(ln_in_val), .start(ln_start),
    .busy(ln_busy), .o_valid(ln_ov), .o_idx(ln_oidx), .o_val(ln_oval), .done(ln_done));

  gelu_unit u_gelu (.x(mm_oval), .y(g_val));

  // residual adds feed the layer norm straight from the engine
  always_comb begin
    ln_in_valid = mm_ov && (st == MO || st == M2);
    ln_in_idx   = mm_ocol;
    ln_in_val   = sat8(64'(mm_oval) + 64'((st == MO) ? xres[mm_ocol[$clog2(D_MODEL)-1:0]]
                                                     : ybuf[mm_ocol[$clog2(D_MODEL)-1:0]]));
  end

  // word assembly of element streams (LN outputs, GELU outputs)
  logic [LANES*8-1:0] wacc;
  logic [7:0]         e_val;
  logic [11:0]        e_idx;
  logic               e_vld;
  always_comb begin
    e_vld = (st == M1) ? mm_ov : ln_ov;
    e_idx = (st == M1) ? mm_ocol : ln_oidx;
    e_val = (st == M1) ? g_val : ln_oval;
  end

  logic s_rd_en;
  logic [ADDR_W-1:0] s_rd_addr;
  assign rd_en   = (st == MO || st == M1 || st == M2) ? mm_rd_en : s_rd_en;
  assign rd_addr = (st == MO || st == M1 || st == M2) ? mm_rd_addr : s_rd_addr;
  assign busy    = (st != IDLE);

  always_ff @(posedge clk) begin
    if (pend && 32'(pend_i) < XW)
      for (int l = 0; l < LANES; l++) xres[32'(pend_i) * LANES + l] <= rd_data[l*8 +: 8];
    if (st == LN1 && ln_ov) ybuf[ln_oidx[$clog2(D_MODEL)-1:0]] <= ln_oval;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; jb <= '0; r <= '0; li <= '0; pend <= 1'b0; pend_i <= '0;
      s_rd_en <= 1'b0; s_rd_addr <= '0; wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0; done <= 1'b0;
      mm_start <= 1'b0; mm_bank <= 1'b0; mm_dw <= '0; mm_nc <= '0; mm_mat <= M_WO;
      xw_en <= 1'b0; xw_bank <= 1'b0; xw_addr <= '0; xw_data <= '0; ln_start <= 1'b0; wacc <= '0;
    end else begin
      s_rd_en <= 1'b0; wr_en <= 1'b0; done <= 1'b0; mm_start <= 1'b0; xw_en <= 1'b0; ln_start <= 1'b0;
      pend   <= s_rd_en && (st == LOAD || st == LWAIT);
      pend_i <= li - 1'b1;
      if (pend && 32'(pend_i) >= XW) begin       // Z words go to engine bank 0
        xw_en <= 1'b1; xw_bank <= 1'b0; xw_addr <= 6'(32'(pend_i) - XW); xw_data <= rd_data;
      end
      if (e_vld && (st == LN1 || st == M1 || st == LN2)) begin
        logic [LANES*8-1:0] wn;
        wn   = {e_val, wacc[LANES*8-1:8]};
        wacc <= wn;
        if (e_idx[LB-1:0] == LB'(LANES - 1)) begin
          if (st == LN2) begin
            wr_en <= 1'b1; wr_data <= wn;
            wr_addr <= act_addr(R_X, jb.slot, 5'd0, r, 6'(e_idx[11:LB]));
          end else begin
            xw_en <= 1'b1; xw_bank <= (st == LN1); xw_addr <= 6'(e_idx[11:LB]); xw_data <= wn;
          end
        end
      end
      case (st)
        IDLE: if (job_valid) begin jb <= job; r <= '0; li <= '0; st <= LOAD; end
        LOAD: begin
          s_rd_en <= 1'b1;
          s_rd_addr <= (32'(li) < XW) ? act_addr(R_X, jb.slot, 5'd0, r, 6'(li))
                                     : act_addr(R_Z, jb.slot, 5'd0, r, 6'(32'(li) - XW));
          li <= li + 1'b1;
          if (32'(li) == 2 * XW - 1) st <= LWAIT;
        end
        LWAIT: if (!s_rd_en && !pend && !xw_en) begin
          mm_start <= 1'b1; mm_bank <= 1'b0; mm_dw <= 7'(XW); mm_nc <= 13'(D_MODEL); mm_mat <= M_WO;
          st <= MO;
        end
        MO: if (mm_done) begin ln_start <= 1'b1; st <= LN1; end
        LN1: if (ln_done) begin st <= M1; mm_start <= 1'b1; mm_bank <= 1'b1; mm_dw <= 7'(XW);
                                  mm_nc <= 13'(D_FF); mm_mat <= M_W1; end
        M1: if (mm_done) begin st <= M2; mm_start <= 1'b1; mm_bank <= 1'b0; mm_dw <= 7'(FW);
                                mm_nc <= 13'(D_MODEL); mm_mat <= M_W2; end
        M2: if (mm_done) begin ln_start <= 1'b1; st <= LN2; end
        LN2: if (ln_done) begin
          if (r == jb.len - 1'b1) st <= FIN;
          else begin r <= r + 1'b1; li <= '0; st <= LOAD; end
        end
        FIN: if (!wr_en) begin done <= 1'b1; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
