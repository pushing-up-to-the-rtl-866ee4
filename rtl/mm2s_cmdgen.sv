// mm2s_cmdgen: the memory command generator. For one decoded token it issues,
// in order, every read the model needs, so that weights and cache stream from
// memory in long consecutive bursts while the dot engine works.
//
// Order of commands for one token (the head-wise fused schedule of the
// original design; per head the query projection comes first, then the key
// projection, the key-cache product, the value projection and the weighted sum
// over the value cache):
//   LN1 weights of layer 0, embedding row of the token;
//   for each layer l:
//     for each head h:  W_Q[h] ; W_K[h] ; K cache[l][h] (tokens 0..p-1,
//                        skipped at p = 0) ; W_V[h] ; V cache[l][h]
//                        (tokens 0..p) ;
//     LN2 weights ; W_O ; W_gate ; W_up ; LN1 weights of layer l+1 (final
//     norm weights after the last layer) ; W_down ;
//   LM head (skipped for prompt tokens, is_prefill = 1).
// Norm weights are fetched just before the norm that uses them. The value
// cache read includes the current token, whose value was written during W_V;
// the key cache read does not, the current key being used on chip.
//
// Memory map (stream addresses, 64-byte aligned; this design's choice):
// embedding table at 0 (VOCAB x HIDDEN FP16), then per layer LN1, LN2 (FP16),
// W_Q, W_K, W_V, W_O (HIDDEN x HIDDEN), W_gate, W_up (FFN x HIDDEN),
// W_down (HIDDEN x FFN), all 4-bit in the interleaved format, then the final
// norm and the LM head (VOCAB x HIDDEN). A W4 matrix of R x C takes
// R*C/16384 super-blocks of 133 beats. Each head's rows of W_Q/W_K/W_V are
// contiguous. KV cache regions as in kv_to_mem.
//
// Interface: `start` with token id, position and prefill flag (from the
// AXI-Lite registers); valid/ready command output; `busy` until the last
// command has been taken.
module mm2s_cmdgen
  import llm_pkg::*;
#(
  parameter int unsigned HIDDEN   = 4096,
  parameter int unsigned HEADS    = 32,
  parameter int unsigned HEAD_DIM = 128,
  parameter int unsigned LAYERS   = 32,
  parameter int unsigned FFN      = 11008,
  parameter int unsigned VOCAB    = 32000,
  parameter int unsigned MAX_CTX  = 1024,
  parameter logic [31:0] K_BASE   = 32'hE000_0000,
  parameter logic [31:0] V_BASE   = 32'hE840_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] token_id,
  input  logic [15:0] pos,
  input  logic        is_prefill,
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output cmd_t        cmd,
  output logic        busy
);
  function automatic longint w4_bytes(longint r, longint c);
    return (r * c / 16384) * 133 * 64;
  endfunction

  localparam longint VEC_B   = longint'(HIDDEN) * 2;
  localparam longint EMB_B   = longint'(VOCAB) * VEC_B;
  localparam longint SQ_B    = w4_bytes(longint'(HIDDEN), longint'(HIDDEN));
  localparam longint HQ_B    = w4_bytes(longint'(HEAD_DIM), longint'(HIDDEN));
  localparam longint FF_B    = w4_bytes(longint'(FFN), longint'(HIDDEN));
  localparam longint OFF_LN1 = 0;
  localparam longint OFF_LN2 = VEC_B;
  localparam longint OFF_WQ  = 2 * VEC_B;
  localparam longint OFF_WK  = OFF_WQ + SQ_B;
  localparam longint OFF_WV  = OFF_WK + SQ_B;
  localparam longint OFF_WO  = OFF_WV + SQ_B;
  localparam longint OFF_WG  = OFF_WO + SQ_B;
  localparam longint OFF_WU  = OFF_WG + FF_B;
  localparam longint OFF_WD  = OFF_WU + FF_B;
  localparam longint LAYER_B = OFF_WD + FF_B;
  localparam longint FINAL_B = EMB_B + longint'(LAYERS) * LAYER_B;  // final norm, then LM head
  localparam longint HEAD_KV_B = longint'(MAX_CTX) / 16 * 2112;

  typedef enum logic [3:0] {
    S_IDLE, S_LN1_0, S_EMB, S_WQ, S_WK, S_KC, S_WV, S_VC,
    S_LN2, S_WO, S_WG, S_WU, S_LN1N, S_WD, S_LM
  } step_e;

  step_e       st;
  logic [4:0]  l, h;
  logic [15:0] tok_r, pos_r;
  logic        pre_r;
  longint      lbase;

  assign lbase = EMB_B + longint'(l) * LAYER_B;
  assign busy  = (st != S_IDLE);

  function automatic cmd_t mk(kind_e k, mat_e m, longint a, longint b, int rows, int cols);
    cmd_t c;
    c.kind = k; c.mat = m; c.layer = l; c.head = h;
    c.addr = 32'(a); c.bytes = 23'(b); c.rows = 16'(rows); c.cols = 16'(cols);
    return c;
  endfunction

  function automatic longint kv_bytes(int t);
    return 64 * ((longint'(t) + 15) / 16) + 128 * longint'(t);
  endfunction

  always_comb begin
    longint kva;
    kva = longint'(l) * HEADS * HEAD_KV_B + longint'(h) * HEAD_KV_B;
    cmd = '0;
    unique case (st)
      S_LN1_0: cmd = mk(K_RAW, M_LN1, lbase + OFF_LN1, VEC_B, HIDDEN, 0);
      S_EMB:   cmd = mk(K_RAW, M_EMB, longint'(tok_r) * VEC_B, VEC_B, HIDDEN, 0);
      S_WQ:    cmd = mk(K_W4, M_WQ, lbase + OFF_WQ + longint'(h) * HQ_B, HQ_B, HEAD_DIM, HIDDEN);
      S_WK:    cmd = mk(K_W4, M_WK, lbase + OFF_WK + longint'(h) * HQ_B, HQ_B, HEAD_DIM, HIDDEN);
      S_KC:    cmd = mk(K_KV8, M_KC, longint'(K_BASE) + kva, kv_bytes(int'(pos_r)), int'(pos_r), HEAD_DIM);
      S_WV:    cmd = mk(K_W4, M_WV, lbase + OFF_WV + longint'(h) * HQ_B, HQ_B, HEAD_DIM, HIDDEN);
      S_VC:    cmd = mk(K_KV8, M_VC, longint'(V_BASE) + kva, kv_bytes(int'(pos_r) + 1), int'(pos_r) + 1, HEAD_DIM);
      S_LN2:   cmd = mk(K_RAW, M_LN2, lbase + OFF_LN2, VEC_B, HIDDEN, 0);
      S_WO:    cmd = mk(K_W4, M_WO, lbase + OFF_WO, SQ_B, HIDDEN, HIDDEN);
      S_WG:    cmd = mk(K_W4, M_WG, lbase + OFF_WG, FF_B, FFN, HIDDEN);
      S_WU:    cmd = mk(K_W4, M_WU, lbase + OFF_WU, FF_B, FFN, HIDDEN);
      S_LN1N:  cmd = (32'(l) == LAYERS - 1) ? mk(K_RAW, M_LNF, FINAL_B, VEC_B, HIDDEN, 0)
                                            : mk(K_RAW, M_LN1, lbase + LAYER_B + OFF_LN1, VEC_B, HIDDEN, 0);
      S_WD:    cmd = mk(K_W4, M_WD, lbase + OFF_WD, FF_B, HIDDEN, FFN);
      S_LM:    cmd = mk(K_W4, M_LM, FINAL_B + VEC_B, w4_bytes(longint'(VOCAB), longint'(HIDDEN)), VOCAB, HIDDEN);
      default: cmd = '0;
    endcase
  end
  assign cmd_valid = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; l <= '0; h <= '0; tok_r <= '0; pos_r <= '0; pre_r <= 1'b0;
    end else if (st == S_IDLE) begin
      if (start) begin
        st <= S_LN1_0; l <= '0; h <= '0; tok_r <= token_id; pos_r <= pos; pre_r <= is_prefill;
      end
    end else if (cmd_ready) begin
      unique case (st)
        S_LN1_0: st <= S_EMB;
        S_EMB:   st <= S_WQ;
        S_WQ:    st <= S_WK;
        S_WK:    st <= (pos_r == 16'd0) ? S_WV : S_KC;
        S_KC:    st <= S_WV;
        S_WV:    st <= S_VC;
        S_VC:    if (32'(h) == HEADS - 1) begin h <= '0; st <= S_LN2; end
                 else begin h <= h + 5'd1; st <= S_WQ; end
        S_LN2:   st <= S_WO;
        S_WO:    st <= S_WG;
        S_WG:    st <= S_WU;
        S_WU:    st <= S_LN1N;
        S_LN1N:  st <= S_WD;
        S_WD:    if (32'(l) == LAYERS - 1) st <= pre_r ? S_IDLE : S_LM;
                 else begin l <= l + 5'd1; st <= S_WQ; end
        S_LM:    st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // a command may not change while it is offered
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && !cmd_ready |=> $stable(cmd));
endmodule
