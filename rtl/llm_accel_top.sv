// llm_accel_top: the decoder accelerator, from the four memory read ports to
// the logits. One AXI-Lite start decodes one token through every layer.
//
// Dataflow. The command generator issues the reads of one token in order:
// each command goes to the splitter, which turns it into four equal reads on
// the four AXI ports, and into a small queue for the demultiplexer, which
// interprets the joined 512-bit stream. The four port streams are joined by
// data_sync. Weight and cache beats go through the dequantizer into the
// 128-lane dot engine, whose activation operand comes from the on-chip
// operand buffer; plain vectors (embedding row, norm weights) leave the
// demultiplexer on its raw port. Results are routed by the matrix they belong
// to:
//   W_Q, W_K -> RoPE;  rotated q -> operand bank 1 and QK-local;  rotated k ->
//             QK-local and the KV quantizer (key);
//   K cache  -> score * 1/sqrt(d) -> softmax (the local score q.k is pushed
//             last) -> probabilities to operand bank 1;
//   W_V      -> KV quantizer (value);  V cache -> head output, a 128-slice of
//             operand bank 2;
//   W_O, W_D -> residual add and square sum -> RMSNorm (first pass bypassed)
//             -> operand bank 0;  embedding row -> residual (load) -> RMSNorm;
//   W_gate, W_up -> SiLU gating -> operand bank 2;  LM head -> logits port.
// The quantized key and value bytes and their scale-zero packs go to
// kv_to_mem, which writes them to memory through the write port.
//
// Ordering rules kept here (this design's choices; the original gives the
// blocks and the per-head order but not these rules):
//  * an operand bank is marked empty when the demultiplexer takes the command
//    whose results will refill it, and a beat whose operand slice is not yet
//    written waits (operand stall);
//  * the value-cache read of a head, which includes the current token, is not
//    issued to memory before that token's value bytes and pack are written
//    (read-after-write interlock);
//  * a cache read that ends in a block not yet written takes its scale-zero
//    line from chip: the head of the key FIFO, or the line just updated.
// The memory data movers (AXI HP ports with their MM2S/S2MM engines), the
// DDR and the host are outside: their signals are ports.
module llm_accel_top
  import llm_pkg::*;
#(
  parameter int unsigned HIDDEN   = 4096,
  parameter int unsigned HEADS    = 32,
  parameter int unsigned LAYERS   = 32,
  parameter int unsigned FFN      = 11008,
  parameter int unsigned VOCAB    = 32000,
  parameter int unsigned MAX_CTX  = 1024,
  parameter logic [31:0] K_BASE   = 32'hE000_0000,
  parameter logic [31:0] V_BASE   = 32'hE840_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite control (host)
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  input  logic [31:0] s_axil_wdata,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  output logic [1:0]  s_axil_bresp,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  input  logic [7:0]  s_axil_araddr,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  // read commands to the four MM2S data movers
  output logic [3:0]        rd_cmd_valid,
  input  logic [3:0]        rd_cmd_ready,
  output logic [3:0][31:0]  rd_cmd_addr,
  output logic [3:0][22:0]  rd_cmd_bytes,
  // read data from the four AXI HP ports
  input  logic [3:0]        rd_valid,
  output logic [3:0]        rd_ready,
  input  logic [3:0][127:0] rd_data,
  // KV cache writes to the S2MM data mover (stream address space)
  output logic        wr_valid,
  input  logic        wr_ready,
  output logic [31:0] wr_addr,
  output logic [511:0] wr_data,
  // results
  output logic        logit_valid,
  output fp16_t       logit_data,
  output logic [15:0] logit_idx,
  output logic        busy,
  output logic        kv_overflow
);
  localparam int unsigned D       = HEAD_DIM;
  localparam int unsigned ENTRIES = LAYERS * HEADS;
  localparam int unsigned EW      = $clog2(ENTRIES);
  localparam int unsigned CH      = ((HIDDEN > FFN ? HIDDEN : FFN) + LANES - 1) / LANES;
  localparam fp16_t SCORE_SCALE   = 16'h2DA8;   // 1/sqrt(128)

  function automatic logic [1:0] bank_of(mat_e m);
    if (m == M_KC || m == M_VC) return 2'd1;
    if (m == M_WO || m == M_WD) return 2'd2;
    return 2'd0;
  endfunction

  // ---------------- control registers and command generation ----------------
  logic        start, is_prefill;
  logic [15:0] token_index, position;
  logic        cg_valid, cg_ready, cg_busy;
  cmd_t        cg_cmd;

  axil_regs u_regs (
    .clk, .rst_n,
    .awvalid(s_axil_awvalid), .awready(s_axil_awready), .awaddr(s_axil_awaddr),
    .wvalid(s_axil_wvalid), .wready(s_axil_wready), .wdata(s_axil_wdata),
    .bvalid(s_axil_bvalid), .bready(s_axil_bready), .bresp(s_axil_bresp),
    .arvalid(s_axil_arvalid), .arready(s_axil_arready), .araddr(s_axil_araddr),
    .rvalid(s_axil_rvalid), .rready(s_axil_rready), .rdata(s_axil_rdata), .rresp(s_axil_rresp),
    .start, .token_index, .position, .is_prefill, .busy
  );

  mm2s_cmdgen #(
    .HIDDEN(HIDDEN), .HEADS(HEADS), .HEAD_DIM(D), .LAYERS(LAYERS), .FFN(FFN),
    .VOCAB(VOCAB), .MAX_CTX(MAX_CTX), .K_BASE(K_BASE), .V_BASE(V_BASE)
  ) u_cmdgen (
    .clk, .rst_n, .start, .token_id(token_index), .pos(position), .is_prefill,
    .cmd_valid(cg_valid), .cmd_ready(cg_ready), .cmd(cg_cmd), .busy(cg_busy)
  );

  // read-after-write interlock for the value-cache read
  logic [EW:0]  k_cnt, v_cnt;          // packs written this token
  logic [1:0]   v_settle;
  logic         kvm_w_valid;
  logic [EW:0]  cg_entry;
  logic         gate_ok;
  assign cg_entry = (EW+1)'(32'(cg_cmd.layer) * HEADS + 32'(cg_cmd.head));
  assign gate_ok  = (cg_cmd.mat != M_VC) || (v_cnt > cg_entry && v_settle == 2'd3 && !kvm_w_valid);

  // fork: splitter and demultiplexer queue
  logic split_done, q_done, split_ready, q_in_ready;
  logic dq_valid, dm_cmd_ready;
  cmd_t dq_cmd;
  assign cg_ready = cg_valid && gate_ok && (split_done || split_ready) && (q_done || q_in_ready);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      split_done <= 1'b0; q_done <= 1'b0;
    end else if (cg_ready) begin
      split_done <= 1'b0; q_done <= 1'b0;
    end else if (cg_valid && gate_ok) begin
      if (split_ready) split_done <= 1'b1;
      if (q_in_ready)  q_done <= 1'b1;
    end
  end

  cmd_split #(.N_PORTS(N_PORTS)) u_split (
    .clk, .rst_n,
    .s_valid(cg_valid && gate_ok && !split_done), .s_ready(split_ready),
    .s_addr(cg_cmd.addr), .s_bytes(cg_cmd.bytes),
    .m_valid(rd_cmd_valid), .m_ready(rd_cmd_ready), .m_addr(rd_cmd_addr), .m_bytes(rd_cmd_bytes)
  );

  sync_fifo #(.WIDTH($bits(cmd_t)), .DEPTH(4)) u_cmdq (
    .clk, .rst_n,
    .in_valid(cg_valid && gate_ok && !q_done), .in_ready(q_in_ready), .in_data(cg_cmd),
    .out_valid(dq_valid), .out_ready(dm_cmd_ready), .out_data(dq_cmd), .count()
  );

  // ---------------- memory control: join and demultiplex ----------------
  logic         st_valid, st_ready;
  logic [511:0] st_data;
  logic         sync_stall;
  data_sync #(.N_PORTS(N_PORTS), .PORT_W(AXI_W)) u_sync (
    .clk, .rst_n, .s_valid(rd_valid), .s_ready(rd_ready), .s_data(rd_data),
    .m_valid(st_valid), .m_ready(st_ready), .m_data(st_data), .stall(sync_stall)
  );

  logic         vb_valid, vb_ready, raw_valid, raw_last, dm_busy;
  vbeat_t       vb;
  fp16_t        raw_data;
  logic [15:0]  raw_idx;
  mat_e         raw_mat;
  logic [511:0] cur_sz_line;
  cmd_t         dm_cmd;                // command the demultiplexer works on
  logic         dq_in_ready, op_avail;

  stream_demux u_demux (
    .clk, .rst_n, .cmd_valid(dq_valid), .cmd_ready(dm_cmd_ready), .cmd(dq_cmd),
    .s_valid(st_valid), .s_ready(st_ready), .s_data(st_data), .cur_sz_line,
    .vb_valid, .vb_ready, .vb,
    .raw_valid, .raw_ready(1'b1), .raw_data, .raw_idx, .raw_mat, .raw_last, .busy(dm_busy)
  );
  assign vb_ready = dq_in_ready && op_avail;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dm_cmd <= '0;
    else if (dq_valid && dm_cmd_ready) dm_cmd <= dq_cmd;
  end

  // bank invalidation when the producing command is taken
  logic       inv_valid;
  logic [1:0] inv_bank;
  always_comb begin
    inv_valid = 1'b0;
    inv_bank  = 2'd0;
    if (dq_valid && dm_cmd_ready) begin
      unique case (dq_cmd.mat)
        M_EMB, M_WO, M_WD: begin inv_valid = 1'b1; inv_bank = 2'd0; end
        M_WQ, M_WV:        begin inv_valid = 1'b1; inv_bank = 2'd1; end
        M_WG:              begin inv_valid = 1'b1; inv_bank = 2'd2; end
        default: ;
      endcase
    end
  end

  // ---------------- vector processing unit ----------------
  logic   dqo_valid;
  vbeat_t dqo_meta;
  fp16_t  dqo_w [LANES];
  fp16_t  op_x  [LANES];
  dequant #(.LANES(LANES)) u_dequant (
    .clk, .rst_n, .in_valid(vb_valid && op_avail), .in_ready(dq_in_ready), .in_beat(vb),
    .out_valid(dqo_valid), .out_meta(dqo_meta), .out_w(dqo_w)
  );

  logic   res_valid, vec_valid;
  fp16_t  res;
  vbeat_t res_meta, vec_meta;
  fp16_t  vec [LANES];
  vpu_dot #(.LANES(LANES)) u_vpu (
    .clk, .rst_n, .in_valid(dqo_valid), .in_meta(dqo_meta), .in_w(dqo_w), .in_x(op_x),
    .res_valid, .res, .res_meta, .vec_valid, .vec, .vec_meta
  );

  // operand buffer and its serial write multiplexer
  logic        s_valid, s_last;
  logic [1:0]  s_bank;
  logic [15:0] s_idx;
  fp16_t       s_data;
  logic        v_wr_last;
  logic [4:0]  cur_h;
  logic [4:0]  cur_l;
  operand_buffer #(.LANES(LANES), .NB(3), .CH(CH)) u_opbuf (
    .clk, .rst_n,
    .s_valid, .s_bank, .s_idx, .s_data, .s_last,
    .v_valid(vec_valid), .v_bank(2'd2), .v_chunk(7'(cur_h)), .v_data(vec), .v_last(v_wr_last),
    .inv_valid, .inv_bank,
    .rd_bank(bank_of(dqo_meta.mat)), .rd_chunk(dqo_meta.chunk), .rd_data(op_x),
    .chk_bank(bank_of(vb.mat)), .chk_chunk(vb.chunk), .rd_avail(op_avail)
  );
  assign v_wr_last = (32'(cur_h) == HEADS - 1);

  // row index of each result within its matrix
  logic [15:0] res_row, row_q;
  mat_e        prev_mat;
  assign res_row = (res_meta.mat != prev_mat) ? 16'd0 : row_q + 16'd1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q <= '0; prev_mat <= M_EMB;
    end else if (start) begin
      prev_mat <= M_EMB;
    end else if (res_valid) begin
      row_q <= res_row; prev_mat <= res_meta.mat;
    end
  end

  // ---------------- special function unit ----------------
  // RoPE with a small input queue (it pauses one cycle per rotation pair)
  logic        rq_valid, rq_ready, rq_is_k, rope_in_ready, rope_is_k;
  logic [23:0] rq_data;
  logic        rope_out_valid;
  fp16_t       rope_out;
  logic [6:0]  rope_out_idx;
  sync_fifo #(.WIDTH(24), .DEPTH(8)) u_ropeq (
    .clk, .rst_n,
    .in_valid(res_valid && (res_meta.mat == M_WQ || res_meta.mat == M_WK)), .in_ready(),
    .in_data({res_meta.mat == M_WK, res_row[6:0], res}),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_data), .count()
  );
  assign rq_is_k  = rq_data[23];
  assign rq_ready = rope_in_ready;
  rope #(.HEAD_DIM(D)) u_rope (
    .clk, .rst_n, .in_valid(rq_valid), .in_ready(rope_in_ready), .in_data(rq_data[15:0]),
    .in_idx(rq_data[22:16]), .pos(position),
    .out_valid(rope_out_valid), .out_data(rope_out), .out_idx(rope_out_idx)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rope_is_k <= 1'b0;
    else if (rq_valid && rq_ready) rope_is_k <= rq_is_k;
  end

  logic  loc_valid;
  fp16_t loc_score;
  qk_local #(.D(D)) u_qkl (
    .clk, .rst_n,
    .q_valid(rope_out_valid && !rope_is_k), .q_data(rope_out), .q_idx(rope_out_idx),
    .k_valid(rope_out_valid && rope_is_k), .k_data(rope_out), .k_idx(rope_out_idx),
    .score_valid(loc_valid), .score(loc_score)
  );

  // attention scores: cache scores first, the local score last
  logic        sm_in_valid, sm_in_ready, sm_in_last, sm_out_valid, sm_out_last;
  fp16_t       sm_in_data, sm_out;
  logic [15:0] sm_out_idx, kc_cnt;
  logic        loc_pend;
  fp16_t       loc_hold;
  logic        kc_res, loc_push;
  assign kc_res   = res_valid && res_meta.mat == M_KC;
  assign loc_push = loc_pend && !kc_res && (kc_cnt == position);
  assign sm_in_valid = kc_res || loc_push;
  assign sm_in_data  = fp16_mul(kc_res ? res : loc_hold, SCORE_SCALE);
  assign sm_in_last  = !kc_res && loc_push;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kc_cnt <= '0; loc_pend <= 1'b0; loc_hold <= '0;
    end else begin
      if (loc_valid) begin loc_pend <= 1'b1; loc_hold <= loc_score; end
      if (kc_res) kc_cnt <= kc_cnt + 16'd1;
      else if (loc_push) begin kc_cnt <= '0; loc_pend <= 1'b0; end
    end
  end
  softmax #(.MAX_LEN(MAX_CTX)) u_softmax (
    .clk, .rst_n, .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in_data),
    .in_last(sm_in_last), .out_valid(sm_out_valid), .out_data(sm_out), .out_idx(sm_out_idx),
    .out_last(sm_out_last)
  );

  // residual, square sum and RMSNorm
  logic        rs_in_valid, rs_in_add, rs_in_last;
  fp16_t       rs_in_data;
  logic [15:0] rs_in_idx;
  logic        rs_out_valid, rs_out_last, rs_sq_valid;
  fp16_t       rs_out, rs_sq;
  logic [15:0] rs_out_idx;
  logic        res_is_proj;
  assign res_is_proj = res_valid && (res_meta.mat == M_WO || res_meta.mat == M_WD);
  assign rs_in_valid = res_is_proj || (raw_valid && raw_mat == M_EMB);
  assign rs_in_add   = res_is_proj;
  assign rs_in_data  = res_is_proj ? res : raw_data;
  assign rs_in_idx   = res_is_proj ? res_row : raw_idx;
  assign rs_in_last  = res_is_proj ? (32'(res_row) == HIDDEN - 1) : raw_last;
  residual_sqsum #(.N(HIDDEN)) u_resid (
    .clk, .rst_n, .in_valid(rs_in_valid), .in_data(rs_in_data), .in_idx(rs_in_idx),
    .in_add(rs_in_add), .in_last(rs_in_last),
    .out_valid(rs_out_valid), .out_data(rs_out), .out_idx(rs_out_idx), .out_last(rs_out_last),
    .sq_valid(rs_sq_valid), .sq_sum(rs_sq)
  );

  logic        rn_in_ready, rn_out_valid;
  fp16_t       rn_out;
  logic [15:0] rn_out_idx;
  logic        lnw_we;
  assign lnw_we = raw_valid && (raw_mat == M_LN1 || raw_mat == M_LN2 || raw_mat == M_LNF);
  rmsnorm #(.N(HIDDEN)) u_rmsnorm (
    .clk, .rst_n, .bypass(1'b1), .sq_valid(rs_sq_valid), .sq_sum(rs_sq),
    .in_valid(rs_out_valid), .in_ready(rn_in_ready), .in_data(rs_out), .in_last(rs_out_last),
    .lnw_we, .lnw_addr(raw_idx[$clog2(HIDDEN)-1:0]), .lnw_data(raw_data),
    .out_valid(rn_out_valid), .out_data(rn_out), .out_idx(rn_out_idx)
  );

  // gated MLP activation
  logic        si_out_valid;
  fp16_t       si_out;
  logic [15:0] si_out_idx;
  silu #(.N(FFN)) u_silu (
    .clk, .rst_n,
    .gate_valid(res_valid && res_meta.mat == M_WG), .gate_data(res),
    .up_valid(res_valid && res_meta.mat == M_WU), .up_data(res),
    .out_valid(si_out_valid), .out_data(si_out), .out_idx(si_out_idx)
  );

  // serial writes into the operand buffer (the producers never overlap)
  always_comb begin
    s_valid = 1'b0; s_bank = 2'd0; s_idx = '0; s_data = '0; s_last = 1'b0;
    if (rn_out_valid) begin
      s_valid = 1'b1; s_bank = 2'd0; s_idx = rn_out_idx; s_data = rn_out;
      s_last = (32'(rn_out_idx) == HIDDEN - 1);
    end else if (rope_out_valid && !rope_is_k) begin
      s_valid = 1'b1; s_bank = 2'd1; s_idx = 16'(rope_out_idx); s_data = rope_out;
      s_last = (32'(rope_out_idx) == D - 1);
    end else if (sm_out_valid) begin
      s_valid = 1'b1; s_bank = 2'd1; s_idx = sm_out_idx; s_data = sm_out; s_last = sm_out_last;
    end else if (si_out_valid) begin
      s_valid = 1'b1; s_bank = 2'd2; s_idx = si_out_idx; s_data = si_out;
      s_last = (32'(si_out_idx) == FFN - 1);
    end
  end

  // ---------------- KV cache quantization and write-back ----------------
  // queue of key / value elements waiting for the quantizer
  logic         kq_in_valid, kq_valid, kq_ready, kvq_in_ready;
  logic [33:0]  kq_in, kq_out;         // {is_v, entry(10), idx(7), data(16)}
  logic [9:0]   cur_entry;
  assign cur_entry   = 10'(32'(cur_l) * HEADS + 32'(cur_h));
  assign kq_in_valid = (rope_out_valid && rope_is_k) || (res_valid && res_meta.mat == M_WV);
  assign kq_in = (rope_out_valid && rope_is_k) ? {1'b0, cur_entry, rope_out_idx, rope_out}
                                               : {1'b1, cur_entry, res_row[6:0], res};
  sync_fifo #(.WIDTH(34), .DEPTH(2 * D)) u_kvq_in (
    .clk, .rst_n, .in_valid(kq_in_valid), .in_ready(), .in_data(kq_in),
    .out_valid(kq_valid), .out_ready(kq_ready), .out_data(kq_out), .count()
  );
  assign kq_ready = kvq_in_ready;

  logic        ctx_is_v;
  logic [9:0]  ctx_entry;
  logic [6:0]  kq_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctx_is_v <= 1'b0; ctx_entry <= '0; kq_cnt <= '0;
    end else if (kq_valid && kq_ready) begin
      ctx_is_v <= kq_out[33]; ctx_entry <= kq_out[32:23];
      kq_cnt   <= kq_cnt + 7'd1;
    end
  end

  logic        kvq_out_valid, kvq_out_last, kvq_pack_valid;
  logic [7:0]  kvq_q;
  logic [6:0]  kvq_idx;
  logic [31:0] kvq_pack;
  kv_quant #(.N(D)) u_kvquant (
    .clk, .rst_n, .in_valid(kq_valid), .in_ready(kvq_in_ready), .in_data(kq_out[15:0]),
    .in_idx(kq_out[22:16]), .in_last(kq_cnt == 7'(D - 1)),
    .out_valid(kvq_out_valid), .out_q(kvq_q), .out_idx(kvq_idx), .out_last(kvq_out_last),
    .pack_valid(kvq_pack_valid), .pack(kvq_pack)
  );

  // scale-zero FIFOs, one for keys and one for values
  logic               sz_clear;
  logic [511:0]       k_head, v_head, k_line, v_line, k_snap, v_snap;
  logic               k_lv, v_lv;
  logic [EW-1:0]      k_le, v_le;
  logic [15:0]        k_lb, v_lb;
  assign sz_clear = start && position == 16'd0;
  kv_sz_fifo #(.DEPTH(ENTRIES), .SLOTS(16)) u_szk (
    .clk, .rst_n, .clear(sz_clear), .pack_valid(kvq_pack_valid && !ctx_is_v), .pack(kvq_pack),
    .head_line(k_head), .line_valid(k_lv), .line(k_line), .line_entry(k_le), .line_blk(k_lb)
  );
  kv_sz_fifo #(.DEPTH(ENTRIES), .SLOTS(16)) u_szv (
    .clk, .rst_n, .clear(sz_clear), .pack_valid(kvq_pack_valid && ctx_is_v), .pack(kvq_pack),
    .head_line(v_head), .line_valid(v_lv), .line(v_line), .line_entry(v_le), .line_blk(v_lb)
  );

  // the line of the entry just updated, and the pack counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_snap <= '0; v_snap <= '0; k_cnt <= '0; v_cnt <= '0; v_settle <= '0;
    end else if (start) begin
      k_cnt <= '0; v_cnt <= '0; v_settle <= '0;
    end else begin
      if (v_settle != 2'd3) v_settle <= v_settle + 2'd1;
      if (kvq_pack_valid && !ctx_is_v) begin
        k_snap <= k_head;
        k_snap[32*position[3:0] +: 32] <= kvq_pack;
        k_cnt  <= k_cnt + 1'b1;
      end
      if (kvq_pack_valid && ctx_is_v) begin
        v_snap <= v_head;
        v_snap[32*position[3:0] +: 32] <= kvq_pack;
        v_cnt  <= v_cnt + 1'b1;
        v_settle <= '0;
      end
    end
  end
  logic [EW:0] dm_entry;
  assign dm_entry    = (EW+1)'(32'(dm_cmd.layer) * HEADS + 32'(dm_cmd.head));
  assign cur_sz_line = (dm_cmd.mat == M_VC) ? v_snap : ((k_cnt > dm_entry) ? k_snap : k_head);

  kv_to_mem #(
    .HEADS(HEADS), .MAX_CTX(MAX_CTX), .ENTRIES(ENTRIES), .K_BASE(K_BASE), .V_BASE(V_BASE)
  ) u_kv2mem (
    .clk, .rst_n,
    .b_valid(kvq_out_valid), .b_data(kvq_q), .b_idx(kvq_idx),
    .ctx_is_v, .ctx_entry(ctx_entry[EW-1:0]), .ctx_tok(position),
    .l_valid(k_lv || v_lv), .l_is_v(v_lv), .l_line(v_lv ? v_line : k_line),
    .l_entry(v_lv ? v_le : k_le), .l_blk(v_lv ? v_lb : k_lb),
    .w_valid(kvm_w_valid), .w_ready(wr_ready), .w_addr(wr_addr), .w_data(wr_data),
    .overflow(kv_overflow)
  );
  assign wr_valid = kvm_w_valid;

  // ---------------- head / layer tracking and outputs ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_h <= '0; cur_l <= '0;
    end else if (start) begin
      cur_h <= '0; cur_l <= '0;
    end else begin
      if (vec_valid) cur_h <= (32'(cur_h) == HEADS - 1) ? 5'd0 : cur_h + 5'd1;
      if (res_valid && res_meta.mat == M_WD && 32'(res_row) == HIDDEN - 1) cur_l <= cur_l + 5'd1;
    end
  end

  assign logit_valid = res_valid && res_meta.mat == M_LM;
  assign logit_data  = res;
  assign logit_idx   = res_row;
  assign busy        = cg_busy || dq_valid || dm_busy;

  // ---------------- rules ----------------
  assert property (@(posedge clk) disable iff (!rst_n) sm_in_valid |-> sm_in_ready);
  assert property (@(posedge clk) disable iff (!rst_n) rs_out_valid |-> rn_in_ready);
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(rn_out_valid && ((rope_out_valid && !rope_is_k) || sm_out_valid || si_out_valid)));
  assert property (@(posedge clk) disable iff (!rst_n) !(res_is_proj && raw_valid && raw_mat == M_EMB));
  assert property (@(posedge clk) disable iff (!rst_n) !(k_lv && v_lv));
endmodule
