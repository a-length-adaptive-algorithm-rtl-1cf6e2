// length_scheduler: the length-aware coarse-grained pipeline controller.
//
// A batch of up to BATCH sequences is first sorted by decreasing length (BATCH
// rounds of an arg-max over the not-yet-picked lengths). Each sequence then
// carries its own state, StateMM -> StateAtten -> StateFF, once per encoder
// layer, and finally StateDone. Each of the three stages walks the sorted order,
// layer after layer: as soon as a stage is free and the next sequence in its
// order has reached that stage's state for that layer, the sequence is handed
// over. A sequence's next layer can therefore enter Stage 1 right behind the last
// sequence of the current layer, so different lengths and different layers fill
// each other's gaps instead of being padded to the longest sequence.
// Per stage the unit counts busy cycles and waiting cycles (free while work is
// still left), which measure utilization and pipeline bubbles.
// Stage handshake: sN_job_valid is a one-cycle pulse with sN_job; the stage
// answers with a one-cycle sN_done when the sequence is finished.
module length_scheduler #(
  parameter int unsigned BATCH = lat_pkg::BATCH_DEF,
  localparam int unsigned BW   = $clog2(BATCH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [BW-1:0]        batch_cnt,
  input  logic [11:0]          batch_len [BATCH],
  input  logic [4:0]           num_layers,
  output logic                 running,
  output logic                 done,
  output logic                 job_valid [3],
  output lat_pkg::job_t        job       [3],
  input  logic                 stage_done[3],
  output logic [31:0]          busy_cycles [3],
  output logic [31:0]          wait_cycles [3],
  output logic [31:0]          total_cycles,
  output logic [4:0]           order [BATCH]
);
  import lat_pkg::*;

  typedef enum logic [1:0] {IDLE, SORT, RUN} st_e;
  st_e st;

  logic [BATCH-1:0] picked;
  logic [BW-1:0]    k;
  seq_state_e       sst  [BATCH];
  logic [4:0]       slay [BATCH];
  logic [BW-1:0]    cnt;
  logic [4:0]       nl;
  logic [BW-1:0]    pos  [3];
  logic [4:0]       lay  [3];
  logic             infl [3];
  logic [4:0]       cur  [3];
  logic             all_done;

  // arg-max over the sequences not yet placed (first one wins a tie)
  logic [4:0]  best;
  always_comb begin
    logic [11:0] bl;
    logic        found;
    best = '0; bl = '0; found = 1'b0;
    for (int b = 0; b < BATCH; b++)
      if (b < int'(cnt) && !picked[b] && (!found || batch_len[b] > bl)) begin
        best = 5'(b); bl = batch_len[b]; found = 1'b1;
      end
  end

  always_comb begin
    all_done = 1'b1;
    for (int b = 0; b < BATCH; b++)
      if (b < int'(cnt) && sst[b] != StateDone) all_done = 1'b0;
  end

  assign running = (st != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; picked <= '0; k <= '0; cnt <= '0; nl <= '0; done <= 1'b0; total_cycles <= '0;
      for (int b = 0; b < BATCH; b++) begin sst[b] <= StateDone; slay[b] <= '0; order[b] <= '0; end
      for (int s = 0; s < 3; s++) begin
        pos[s] <= '0; lay[s] <= '0; infl[s] <= 1'b0; cur[s] <= '0; job_valid[s] <= 1'b0;
        job[s] <= '0; busy_cycles[s] <= '0; wait_cycles[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      for (int s = 0; s < 3; s++) job_valid[s] <= 1'b0;
      case (st)
        IDLE: if (start) begin
          cnt <= batch_cnt; nl <= num_layers; picked <= '0; k <= '0; total_cycles <= '0;
          for (int s = 0; s < 3; s++) begin
            pos[s] <= '0; lay[s] <= '0; infl[s] <= 1'b0; busy_cycles[s] <= '0; wait_cycles[s] <= '0;
          end
          st <= SORT;
        end
        SORT: begin
          if (k == cnt) begin
            for (int b = 0; b < BATCH; b++) begin
              sst[b]  <= (b < int'(cnt)) ? StateMM : StateDone;
              slay[b] <= '0;
            end
            st <= RUN;
          end else begin
            order[k[4:0]] <= best;
            picked[best]  <= 1'b1;
            k <= k + 1'b1;
          end
        end
        RUN: begin
          total_cycles <= total_cycles + 1'b1;
          for (int s = 0; s < 3; s++) begin
            logic [4:0] nx;
            nx = order[pos[s][4:0]];
            if (infl[s]) busy_cycles[s] <= busy_cycles[s] + 1'b1;
            if (infl[s] && stage_done[s]) begin
              infl[s] <= 1'b0;
              case (s)
                0: sst[cur[s]] <= StateAtten;
                1: sst[cur[s]] <= StateFF;
                default: begin
                  slay[cur[s]] <= slay[cur[s]] + 1'b1;
                  sst[cur[s]]  <= (slay[cur[s]] + 1'b1 == nl) ? StateDone : StateMM;
                end
              endcase
            end else if (!infl[s] && lay[s] != nl) begin
              if (sst[nx] == seq_state_e'(s) && slay[nx] == lay[s]) begin
                job_valid[s] <= 1'b1;
                job[s]       <= '{slot: nx, len: batch_len[nx], layer: lay[s]};
                infl[s]      <= 1'b1;
                cur[s]       <= nx;
                if (pos[s] == cnt - 1'b1) begin pos[s] <= '0; lay[s] <= lay[s] + 1'b1; end
                else pos[s] <= pos[s] + 1'b1;
              end else begin
                wait_cycles[s] <= wait_cycles[s] + 1'b1;
              end
            end
          end
          if (all_done) begin st <= IDLE; done <= 1'b1; end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
