// lat_pkg: shared constants, types and helper functions of the length-adaptive
// sparse-attention Transformer encoder.
//
// Number formats (a choice of this design; the source only says activations and
// weights are 8-bit fixed point): activations are int8 with 4 fraction bits,
// weights int8 with 7 fraction bits. The HBM address map is a fixed bit-field
// layout (also this design's choice):
//   activations: {1'b0, region[2:0], slot[4:0], head[4:0], token[11:0], word[5:0]}
//   weights:     {1'b1, 5'b0, layer[4:0], matrix[2:0], column[11:0], word[5:0]}
// so every row of every region starts on its own word and no multiplier is needed
// to form an address.
package lat_pkg;

  // Default sizes: BERT-base (12 layers, hidden 768, 12 heads, FFN 3072), Top-30.
  localparam int unsigned D_MODEL_DEF  = 768;
  localparam int unsigned N_HEADS_DEF  = 12;
  localparam int unsigned D_HEAD_DEF   = 64;
  localparam int unsigned D_FF_DEF     = 3072;
  localparam int unsigned N_LAYERS_DEF = 12;
  localparam int unsigned TOPK_DEF     = 30;
  localparam int unsigned QBITS_DEF    = 1;
  localparam int unsigned LANES_DEF    = 64;
  localparam int unsigned MAX_LEN_DEF  = 1024;
  localparam int unsigned BATCH_DEF    = 16;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned IDX_W  = 16;   // token index width inside a Top-k word

  typedef enum logic [2:0] {
    R_X  = 3'd0,   // layer input / output rows
    R_Q  = 3'd1,
    R_K  = 3'd2,
    R_V  = 3'd3,
    R_TK = 3'd4,   // Top-k index word per (head, query row)
    R_Z  = 3'd5    // attention output rows, token-major
  } region_e;

  typedef enum logic [2:0] {
    M_WQ = 3'd0, M_WK = 3'd1, M_WV = 3'd2, M_WO = 3'd3, M_W1 = 3'd4, M_W2 = 3'd5
  } matrix_e;

  // Per-sequence step of the length-aware scheduler.
  typedef enum logic [1:0] {
    StateMM    = 2'd0,
    StateAtten = 2'd1,
    StateFF    = 2'd2,
    StateDone  = 2'd3
  } seq_state_e;

  // A job handed by the scheduler to one coarse-grained stage.
  typedef struct packed {
    logic [4:0]  slot;    // batch slot (original position of the sequence)
    logic [11:0] len;     // sequence length in tokens
    logic [4:0]  layer;   // encoder layer
  } job_t;

  function automatic logic [ADDR_W-1:0] act_addr(region_e r, logic [4:0] slot,
      logic [4:0] head, logic [11:0] token, logic [5:0] word);
    return {1'b0, r, slot, head, token, word};
  endfunction

  function automatic logic [ADDR_W-1:0] w_addr(logic [4:0] layer, matrix_e m,
      logic [11:0] col, logic [5:0] word);
    return {1'b1, 5'b0, layer, m, col, word};
  endfunction

  function automatic logic signed [7:0] sat8(logic signed [63:0] v);
    if (v > 64'sd127) return 8'sd127;
    if (v < -64'sd128) return -8'sd128;
    return v[7:0];
  endfunction

  // Decode a quantized code: one bit is a sign (1 -> -1, 0 -> +1); wider codes
  // are two's complement.
  function automatic int qdecode(int unsigned qbits, logic [7:0] code);
    if (qbits == 1) return code[0] ? -1 : 1;
    return int'($signed(code << (8 - qbits))) >>> (8 - qbits);
  endfunction

  // floor(2^16 / sqrt(d)), the 1/sqrt(d) attention scale in 16 fraction bits.
  function automatic int unsigned rsqrt16(int unsigned d);
    longint unsigned r;
    r = 0;
    for (int b = 16; b >= 0; b--) begin
      longint unsigned t;
      t = r | (64'd1 << b);
      if (t * t * d <= 64'd1 << 32) r = t;
    end
    return int'(r);
  endfunction

endpackage
