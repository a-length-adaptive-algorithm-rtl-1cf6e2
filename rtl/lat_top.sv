// lat_top: length-adaptive sparse-attention Transformer encoder accelerator.
//
// Three coarse-grained stages work on different sequences at the same time:
//   Stage 1  stage1_mm_atsel  Q/K/V projections and quantized Top-k candidate
//                             selection (MM | At-Sel)
//   Stage 2  stage2_atcomp    sparse attention on the selected candidates only
//                             (At-Comp)
//   Stage 3  stage3_ffn       output projection, feed-forward, adds and layer
//                             norms (FdFwd)
// They pass data to each other through HBM, where weights also live; each stage
// has its own HBM channel, brought out here as ports (the HBM itself is outside
// the design). The length_scheduler sorts the batch by decreasing length and
// hands sequences to the stages so that the pipeline stays filled across
// sequences and layers.
// Host interface: write the inputs X of every batch slot into HBM, present
// batch_cnt, batch_len, num_layers and qscale (used only when QBITS > 1), pulse
// start, wait for done; the outputs overwrite X. HBM channel model: read data one
// cycle after rd_en, writes take effect when issued. The layout of HBM is given in
// lat_pkg.
module lat_top #(
  parameter int unsigned LANES    = lat_pkg::LANES_DEF,
  parameter int unsigned D_MODEL  = lat_pkg::D_MODEL_DEF,
  parameter int unsigned N_HEADS  = lat_pkg::N_HEADS_DEF,
  parameter int unsigned D_FF     = lat_pkg::D_FF_DEF,
  parameter int unsigned MAX_LEN  = lat_pkg::MAX_LEN_DEF,
  parameter int unsigned TOPK     = lat_pkg::TOPK_DEF,
  parameter int unsigned QBITS    = lat_pkg::QBITS_DEF,
  parameter int unsigned BATCH    = lat_pkg::BATCH_DEF,
  parameter int unsigned N_LAYERS = lat_pkg::N_LAYERS_DEF,
  localparam int unsigned BW      = $clog2(BATCH + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host
  input  logic                        start,
  input  logic [BW-1:0]               batch_cnt,
  input  logic [11:0]                 batch_len [BATCH],
  input  logic [4:0]                  num_layers,
  input  logic [15:0]                 qscale,
  output logic                        busy,
  output logic                        done,
  output logic [31:0]                 busy_cycles [3],
  output logic [31:0]                 wait_cycles [3],
  output logic [31:0]                 total_cycles,
  // HBM channels, one per stage
  output logic                        hbm_rd_en   [3],
  output logic [lat_pkg::ADDR_W-1:0]  hbm_rd_addr [3],
  input  logic [LANES*8-1:0]          hbm_rd_data [3],
  output logic                        hbm_wr_en   [3],
  output logic [lat_pkg::ADDR_W-1:0]  hbm_wr_addr [3],
  output logic [LANES*8-1:0]          hbm_wr_data [3]
);
  import lat_pkg::*;

  logic       job_valid [3];
  job_t       job       [3];
  logic       sdone     [3];
  logic       sbusy     [3];
  logic [4:0] order     [BATCH];
  logic [4:0] nl;

  // the layer count is limited to the weight sets held in HBM
  assign nl = (32'(num_layers) > N_LAYERS) ? 5'(N_LAYERS) : num_layers;

  length_scheduler #(.BATCH(BATCH)) u_sched (
    .clk, .rst_n, .start, .batch_cnt, .batch_len, .num_layers(nl), .running(busy), .done,
    .job_valid, .job, .stage_done(sdone), .busy_cycles, .wait_cycles, .total_cycles, .order);

  stage1_mm_atsel #(.LANES(LANES), .D_MODEL(D_MODEL), .N_HEADS(N_HEADS), .MAX_LEN(MAX_LEN),
                    .TOPK(TOPK), .QBITS(QBITS)) u_s1 (
    .clk, .rst_n, .job_valid(job_valid[0]), .job(job[0]), .qscale, .busy(sbusy[0]), .done(sdone[0]),
    .rd_en(hbm_rd_en[0]), .rd_addr(hbm_rd_addr[0]), .rd_data(hbm_rd_data[0]),
    .wr_en(hbm_wr_en[0]), .wr_addr(hbm_wr_addr[0]), .wr_data(hbm_wr_data[0]));

  stage2_atcomp #(.LANES(LANES), .N_HEADS(N_HEADS), .TOPK(TOPK)) u_s2 (
    .clk, .rst_n, .job_valid(job_valid[1]), .job(job[1]), .busy(sbusy[1]), .done(sdone[1]),
    .rd_en(hbm_rd_en[1]), .rd_addr(hbm_rd_addr[1]), .rd_data(hbm_rd_data[1]),
    .wr_en(hbm_wr_en[1]), .wr_addr(hbm_wr_addr[1]), .wr_data(hbm_wr_data[1]));

  stage3_ffn #(.LANES(LANES), .D_MODEL(D_MODEL), .D_FF(D_FF)) u_s3 (
    .clk, .rst_n, .job_valid(job_valid[2]), .job(job[2]), .busy(sbusy[2]), .done(sdone[2]),
    .rd_en(hbm_rd_en[2]), .rd_addr(hbm_rd_addr[2]), .rd_data(hbm_rd_data[2]),
    .wr_en(hbm_wr_en[2]), .wr_addr(hbm_wr_addr[2]), .wr_data(hbm_wr_data[2]));

  // a stage is only handed a sequence while it is free
  for (genvar s = 0; s < 3; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) job_valid[s] |-> !sbusy[s])
      else $error("lat_top: job issued to a busy stage %0d", s);
  end
endmodule
