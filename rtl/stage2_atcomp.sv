// stage2_atcomp: coarse-grained Stage 2, "At-Comp" (sparse attention
// computation) for one sequence of one layer, built as three sub-stages with an
// intra-stage pipeline:
//   2.1 candidate_loader  reads, per (head, query row), the Top-k index word, the
//                         query row and the selected K and V rows into a bank of
//                         the double buffer;
//   2.2 fused_attention   runs the fused score / scale / mask / exponent loop on
//                         the other bank;
//   2.3 attn_normalize    forms Z = sum e_j v_j / sum e_j and the row is written
//                         to HBM (Z region, token-major: word = head).
// Rows are taken head by head, query by query. 2.1 works on row i+1 while 2.2
// and 2.3 work on row i; 2.2 starts a row only when 2.3's divider is free. Job
// handshake as in the other stages: job_valid taken when !busy, done pulses
// once at the end.
module stage2_atcomp #(
  parameter int unsigned LANES   = lat_pkg::LANES_DEF,
  parameter int unsigned N_HEADS = lat_pkg::N_HEADS_DEF,
  parameter int unsigned TOPK    = lat_pkg::TOPK_DEF,
  localparam int unsigned D_HEAD = LANES,
  localparam int unsigned AW     = $clog2(2 * TOPK + 1)
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

  logic        active;
  job_t        jb;
  logic [4:0]  ld_h, z_h;
  logic [11:0] ld_i, z_i;
  logic        ld_fin;

  // 2.1 -> buffer
  logic ld_start, ld_busy, ld_done, w_ready, w_en, w_done;
  logic [AW-1:0] w_addr;
  logic [LANES*8-1:0] w_data;
  logic [7:0] w_meta;
  // buffer -> 2.2
  logic r_ready, r_done, fa_start, fa_busy;
  logic [7:0] r_meta;
  logic [AW-1:0] ra_addr, rb_addr;
  logic [LANES*8-1:0] ra_data, rb_data;
  // 2.2 -> 2.3
  logic e_valid, e_last, nz_busy, z_valid;
  logic [23:0] e_val;
  logic [D_HEAD*8-1:0] e_v, z;

  candidate_loader #(.LANES(LANES), .TOPK(TOPK)) u_load (
    .clk, .rst_n, .start(ld_start), .slot(jb.slot), .head(ld_h), .row(ld_i), .busy(ld_busy),
    .done(ld_done), .rd_en, .rd_addr, .rd_data, .w_ready, .w_en, .w_addr, .w_data, .w_done, .w_meta);

  pingpong_buffer #(.DEPTH(2 * TOPK + 1), .WIDTH(LANES * 8), .META_W(8)) u_buf (
    .clk, .rst_n, .w_ready, .w_en, .w_addr, .w_data, .w_done, .w_meta,
    .r_ready, .r_meta, .ra_addr, .ra_data, .rb_addr, .rb_data, .r_done);

  fused_attention #(.D_HEAD(D_HEAD), .TOPK(TOPK)) u_fuse (
    .clk, .rst_n, .start(fa_start), .busy(fa_busy), .r_ready, .r_meta, .ra_addr, .ra_data,
    .rb_addr, .rb_data, .r_done, .e_valid, .e_last, .e_val, .e_v);

  attn_normalize #(.D_HEAD(D_HEAD)) u_norm (
    .clk, .rst_n, .e_valid, .e_last, .e_val, .e_v, .busy(nz_busy), .z_valid, .z);

  assign busy     = active;
  assign ld_start = active && !ld_fin && !ld_busy && w_ready && !w_done;
  assign fa_start = active && !fa_busy && r_ready && !r_done && !nz_busy && !e_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; jb <= '0; ld_h <= '0; ld_i <= '0; ld_fin <= 1'b0; z_h <= '0; z_i <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0; done <= 1'b0;
    end else begin
      wr_en <= 1'b0; done <= 1'b0;
      if (!active && job_valid) begin
        active <= 1'b1; jb <= job; ld_h <= '0; ld_i <= '0; ld_fin <= 1'b0; z_h <= '0; z_i <= '0;
      end
      if (ld_start) begin
        if (ld_i == jb.len - 1'b1) begin
          ld_i <= '0;
          if (32'(ld_h) == N_HEADS - 1) ld_fin <= 1'b1;
          else ld_h <= ld_h + 1'b1;
        end else ld_i <= ld_i + 1'b1;
      end
      if (z_valid) begin
        wr_en   <= 1'b1;
        wr_addr <= act_addr(R_Z, jb.slot, 5'd0, z_i, 6'(z_h));
        wr_data <= z;
        if (z_i == jb.len - 1'b1) begin
          z_i <= '0;
          if (32'(z_h) == N_HEADS - 1) begin active <= 1'b0; done <= 1'b1; end
          else z_h <= z_h + 1'b1;
        end else z_i <= z_i + 1'b1;
      end
    end
  end
endmodule
