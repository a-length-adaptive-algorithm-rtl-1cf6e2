// candidate_loader: Stage 2.1, the data-loading sub-stage. For one query row of
// one head it reads the Top-k index word that Stage 1 left in HBM, then the
// query row and the selected key rows K_s and value rows V_s, and writes them
// into the free bank of the double buffer: word 0 = q, words 1..TOPK = K_s,
// words TOPK+1..2*TOPK = V_s. The bank's meta word is the number of valid
// candidates (fewer than TOPK when the sequence is shorter than TOPK).
// Index word layout: candidate t in bits [16t +: 16], count in the top byte
// (so TOPK*16 + 8 <= LANES*8 is required; checked at elaboration).
// start is taken only while w_ready is high (a free bank).
// Timing: one HBM read per cycle, data one cycle after the read (fixed latency,
// this design's model of the HBM channel); a row takes 2*count + 7 cycles.
module candidate_loader #(
  parameter int unsigned LANES = lat_pkg::LANES_DEF,
  parameter int unsigned TOPK  = lat_pkg::TOPK_DEF,
  localparam int unsigned AW   = $clog2(2 * TOPK + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [4:0]                  slot,
  input  logic [4:0]                  head,
  input  logic [11:0]                 row,
  output logic                        busy,
  output logic                        done,
  // HBM read channel
  output logic                        rd_en,
  output logic [lat_pkg::ADDR_W-1:0]  rd_addr,
  input  logic [LANES*8-1:0]          rd_data,
  // double-buffer producer side
  input  logic                        w_ready,
  output logic                        w_en,
  output logic [AW-1:0]               w_addr,
  output logic [LANES*8-1:0]          w_data,
  output logic                        w_done,
  output logic [7:0]                  w_meta
);
  typedef enum logic [2:0] {IDLE, TK, TKWAIT, KV, FIN} st_e;
  st_e st;
  logic [4:0]  s_slot, s_head;
  logic [11:0] s_row;
  logic [TOPK*16-1:0] idx;
  logic [7:0]  cnt;
  logic [7:0]  j;         // candidate being read
  logic        kv;        // 0: K rows, 1: V rows
  logic        rd_buf;    // the read in flight goes to the buffer
  logic [AW-1:0] rd_tag;  // ... at this word
  logic        pend;      // a buffer read returns this cycle
  logic [AW-1:0] pend_addr;

  assign busy = (st != IDLE);

  // the index word must hold TOPK 16-bit indices below the count byte
  if (TOPK * 16 + 8 > LANES * 8) begin : g_bad_topk
    $error("candidate_loader: TOPK indices do not fit one HBM word");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; s_slot <= '0; s_head <= '0; s_row <= '0; idx <= '0; cnt <= '0; j <= '0;
      kv <= 1'b0; pend <= 1'b0; pend_addr <= '0; rd_buf <= 1'b0; rd_tag <= '0; rd_en <= 1'b0; rd_addr <= '0;
      w_en <= 1'b0; w_addr <= '0; w_data <= '0; w_done <= 1'b0; w_meta <= '0; done <= 1'b0;
    end else begin
      rd_en <= 1'b0; w_en <= 1'b0; w_done <= 1'b0; done <= 1'b0;
      // returning data goes straight into the buffer
      pend      <= rd_en && rd_buf;
      pend_addr <= rd_tag;
      rd_buf    <= 1'b0;
      if (pend) begin
        w_en <= 1'b1; w_addr <= pend_addr; w_data <= rd_data;
      end
      case (st)
        IDLE: if (start && w_ready) begin
          s_slot <= slot; s_head <= head; s_row <= row; st <= TKWAIT;
          rd_en <= 1'b1; rd_addr <= lat_pkg::act_addr(lat_pkg::R_TK, slot, head, row, 6'd0);
        end
        TKWAIT: st <= TK;   // the index-word read is on the channel
        TK: begin     // index word returns now; ask for the query row
          idx <= rd_data[TOPK*16-1:0];
          cnt <= rd_data[LANES*8-1 -: 8];
          rd_en <= 1'b1; rd_addr <= lat_pkg::act_addr(lat_pkg::R_Q, s_slot, s_head, s_row, 6'd0);
          rd_buf <= 1'b1; rd_tag <= '0;
          j <= '0; kv <= 1'b0; st <= KV;
        end
        KV: begin
          rd_en   <= 1'b1;
          rd_addr <= lat_pkg::act_addr(kv ? lat_pkg::R_V : lat_pkg::R_K, s_slot, s_head,
                                       idx[j*16 +: 12], 6'd0);
          rd_buf <= 1'b1;
          rd_tag <= AW'(1 + 32'(j) + (kv ? TOPK : 0));
          if (j == cnt - 1'b1) begin
            j <= '0;
            if (kv) st <= FIN; else kv <= 1'b1;
          end else begin
            j <= j + 1'b1;
          end
        end
        FIN: if (!rd_en && !pend && !w_en) begin
          w_done <= 1'b1; w_meta <= cnt; done <= 1'b1; st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
