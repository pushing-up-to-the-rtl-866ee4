// tb_llm_accel_top: end-to-end test of the decoder accelerator on a small
// model (2 layers, hidden 512, 4 heads of 128, MLP 768, vocabulary 256,
// 40 tokens over a 48-token cache).
//
// The testbench plays host and memory. It builds the model in memory in the
// accelerator's storage formats (4-bit weights in 133-beat super-blocks, FP16
// embedding rows and norm weights), decodes a sequence of tokens through the
// AXI-Lite registers (the first ones as prompt tokens, the rest with logits),
// and serves the four read ports from a memory model that answers each port
// with random gaps, so the ports drift apart. KV-cache writes go into the
// same memory and are read back by later tokens.
//
// A double-precision reference runs the same model: RMSNorm, rotary
// embedding, attention over an 8-bit cache quantized the same way (scale
// (max-min)/255, zero point -ceil(min/s)), SiLU-gated MLP, residuals and LM
// head. Logits must agree within a tolerance that covers FP16 rounding.
// The test also counts each mechanism of the design and counts a failure for
// any that never happened: port-skew stalls, operand stalls, the value-cache
// read-after-write interlock, scale-zero lines flushed to memory, cache reads
// ending in an on-chip line, the RMSNorm first-pass bypass, the skipped key
// read of position 0, the local attention score, the weighted-sum mode of the
// dot engine, and the skipped LM head of prompt tokens.
module tb_llm_accel_top;
  import llm_pkg::*;
  import tb_fp16_pkg::*;

  localparam int H   = 512;
  localparam int NH  = 4;
  localparam int L   = 2;
  localparam int F   = 768;
  localparam int V   = 256;
  localparam int CTX = 48;
  localparam int NT  = 40;          // tokens decoded
  localparam int NPRE = 20;         // of which prompt tokens
  localparam int DH  = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [7:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0]  bresp, rresp;
  logic [3:0]        rc_valid, rc_ready, rd_valid, rd_ready;
  logic [3:0][31:0]  rc_addr;
  logic [3:0][22:0]  rc_bytes;
  logic [3:0][127:0] rd_data;
  logic        wr_valid, wr_ready;
  logic [31:0] wr_addr;
  logic [511:0] wr_data;
  logic        logit_valid, busy, kv_overflow;
  fp16_t       logit_data;
  logic [15:0] logit_idx;

  llm_accel_top #(.HIDDEN(H), .HEADS(NH), .LAYERS(L), .FFN(F), .VOCAB(V), .MAX_CTX(CTX)) dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .rd_cmd_valid(rc_valid), .rd_cmd_ready(rc_ready), .rd_cmd_addr(rc_addr), .rd_cmd_bytes(rc_bytes),
    .rd_valid, .rd_ready, .rd_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .logit_valid, .logit_data, .logit_idx, .busy, .kv_overflow
  );

  int checks = 0, failures = 0;

  // ---------------- memory model ----------------
  logic [511:0] mem [longint];      // keyed by stream address / 64

  function automatic logic [511:0] rdline(longint a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  // per-port command queues and beat counters
  longint pq_line [4][$];
  int     pq_beats [4][$];
  int     p_cnt [4];
  assign rc_ready = 4'hF;

  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (rc_valid[k]) begin
        pq_line[k].push_back((longint'(rc_addr[k]) - (longint'(k) << 30)) / 16);
        pq_beats[k].push_back(int'(rc_bytes[k]) / 16);
      end
    end
  end

  // each port drives a beat when it has one and its random gate is open
  logic [3:0] gate;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) gate[k] <= ($urandom % 8) != 0;
  end
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      rd_valid[k] = 1'b0;
      rd_data[k]  = '0;
      if (rst_n && pq_line[k].size() > 0 && gate[k]) begin
        rd_valid[k] = 1'b1;
        rd_data[k]  = rdline(pq_line[k][0] + longint'(p_cnt[k]))[128*k +: 128];
      end
    end
  end
  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (!rst_n) p_cnt[k] <= 0;
      else if (rd_valid[k] && rd_ready[k]) begin
        if (p_cnt[k] + 1 == pq_beats[k][0]) begin
          p_cnt[k] <= 0;
          void'(pq_line[k].pop_front()); void'(pq_beats[k].pop_front());
        end else p_cnt[k] <= p_cnt[k] + 1;
      end
    end
  end

  int n_wr = 0;
  always_ff @(posedge clk) begin
    wr_ready <= ($urandom % 4) != 0;
    if (rst_n && wr_valid && wr_ready) begin
      mem[longint'(wr_addr) / 64] = wr_data;
      n_wr <= n_wr + 1;
    end
  end

  // ---------------- model in memory and reference weights ----------------
  localparam longint VEC_B = H * 2;
  localparam longint EMB_B = longint'(V) * VEC_B;
  function automatic longint w4b(longint r, longint c);
    return (r * c / 16384) * 133 * 64;
  endfunction
  localparam longint SQ_B = w4b(H, H);
  localparam longint FF_B = w4b(F, H);
  localparam longint LAYER_B = 2 * VEC_B + 4 * SQ_B + 3 * FF_B;
  localparam longint FINAL_B = EMB_B + L * LAYER_B;

  real emb [V][H];
  real ln1 [L][H], ln2 [L][H], lnf [H];
  real wq [L][], wk [L][], wv [L][], wo [L][], wg [L][], wu [L][], wd [L][], wlm [];

  // writes an FP16 vector of n elements at byte address a; returns its values
  task automatic put_raw(longint a, int n, real lo, real hi, output real v []);
    logic [15:0] h16;
    logic [511:0] line;
    v = new[n];
    for (int e = 0; e < n; e++) begin
      h16 = r2h(lo + (hi - lo) * real'($urandom % 10000) / 10000.0);
      v[e] = h2r(h16);
      line = rdline(a / 64 + e / 32);
      line[16 * (e % 32) +: 16] = h16;
      mem[a / 64 + e / 32] = line;
    end
  endtask

  // writes an R x C 4-bit matrix in super-block format; returns (q - z) * s
  task automatic put_w4(longint a, int r, int c, output real w []);
    int g, sb, j, beat, zpv, qv;
    longint base;
    logic [15:0] s16;
    logic [511:0] line;
    w = new[r * c];
    base = a / 64;
    for (g = 0; g < r * c / 128; g++) begin
      sb = g / 128; j = g % 128;
      zpv = $urandom % 16;
      s16 = r2h(0.01 + 0.02 * real'($urandom % 1000) / 1000.0);
      line = rdline(base + sb * 133);
      line[4 * j +: 4] = 4'(zpv);
      mem[base + sb * 133] = line;
      beat = 1 + (j / 32) * 33;
      line = rdline(base + sb * 133 + beat);
      line[16 * (j % 32) +: 16] = s16;
      mem[base + sb * 133 + beat] = line;
      beat = beat + 1 + (j % 32);
      line = '0;
      for (int i = 0; i < 128; i++) begin
        qv = $urandom % 16;
        line[4 * i +: 4] = 4'(qv);
        w[g * 128 + i] = real'(qv - zpv) * h2r(s16);
      end
      mem[base + sb * 133 + beat] = line;
    end
  endtask

  task automatic build_model();
    real tmp [];
    longint lb;
    for (int t = 0; t < V; t++) begin
      put_raw(longint'(t) * VEC_B, H, -1.0, 1.0, tmp);
      for (int e = 0; e < H; e++) emb[t][e] = tmp[e];
    end
    for (int l = 0; l < L; l++) begin
      lb = EMB_B + longint'(l) * LAYER_B;
      put_raw(lb, H, 0.5, 1.5, tmp);          for (int e = 0; e < H; e++) ln1[l][e] = tmp[e];
      put_raw(lb + VEC_B, H, 0.5, 1.5, tmp);  for (int e = 0; e < H; e++) ln2[l][e] = tmp[e];
      put_w4(lb + 2 * VEC_B, H, H, wq[l]);
      put_w4(lb + 2 * VEC_B + SQ_B, H, H, wk[l]);
      put_w4(lb + 2 * VEC_B + 2 * SQ_B, H, H, wv[l]);
      put_w4(lb + 2 * VEC_B + 3 * SQ_B, H, H, wo[l]);
      put_w4(lb + 2 * VEC_B + 4 * SQ_B, F, H, wg[l]);
      put_w4(lb + 2 * VEC_B + 4 * SQ_B + FF_B, F, H, wu[l]);
      put_w4(lb + 2 * VEC_B + 4 * SQ_B + 2 * FF_B, H, F, wd[l]);
    end
    put_raw(FINAL_B, H, 0.5, 1.5, tmp);
    for (int e = 0; e < H; e++) lnf[e] = tmp[e];
    put_w4(FINAL_B + VEC_B, V, H, wlm);
  endtask

  // ---------------- reference model ----------------
  real kc [L][NH][CTX][DH], vc [L][NH][CTX][DH];   // dequantized cache
  real ref_logits [V];

  function automatic void rmsn(ref real x [H], ref real w [H], output real y [H]);
    real ss;
    ss = 0.0;
    for (int i = 0; i < H; i++) ss += x[i] * x[i];
    ss = 1.0 / $sqrt(ss / H);
    for (int i = 0; i < H; i++) y[i] = x[i] * ss * w[i];
  endfunction

  function automatic void quant8(ref real x [DH], output real y [DH]);
    real mx, mn, s;
    int zp, q;
    mx = x[0]; mn = x[0];
    for (int i = 1; i < DH; i++) begin
      if (x[i] > mx) mx = x[i];
      if (x[i] < mn) mn = x[i];
    end
    s  = h2r(r2h((mx - mn) / 255.0));
    zp = -int'($ceil(mn / s));
    if (zp < 0) zp = 0;
    if (zp > 255) zp = 255;
    for (int i = 0; i < DH; i++) begin
      q = int'(x[i] / s) + zp;     // round to nearest
      if (q < 0) q = 0;
      if (q > 255) q = 255;
      y[i] = real'(q - zp) * s;
    end
  endfunction

  task automatic ref_token(int tok, int p, bit want_logits);
    real x [H], hn [H], att [H], q [DH], k [DH], v [DH], qr [DH], kr [DH], tmp [DH];
    real sc [CTX], mx, den, a, th, c, sn, g, u;
    real act [F];
    for (int i = 0; i < H; i++) x[i] = emb[tok][i];
    for (int l = 0; l < L; l++) begin
      rmsn(x, ln1[l], hn);
      for (int h = 0; h < NH; h++) begin
        for (int r = 0; r < DH; r++) begin
          q[r] = 0.0; k[r] = 0.0; v[r] = 0.0;
          for (int i = 0; i < H; i++) begin
            q[r] += wq[l][(h * DH + r) * H + i] * hn[i];
            k[r] += wk[l][(h * DH + r) * H + i] * hn[i];
            v[r] += wv[l][(h * DH + r) * H + i] * hn[i];
          end
        end
        for (int j = 0; j < DH / 2; j++) begin
          th = real'(p) * (10000.0 ** (-2.0 * real'(j) / real'(DH)));
          c = $cos(th); sn = $sin(th);
          qr[j] = q[j] * c - q[j + DH/2] * sn;  qr[j + DH/2] = q[j + DH/2] * c + q[j] * sn;
          kr[j] = k[j] * c - k[j + DH/2] * sn;  kr[j + DH/2] = k[j + DH/2] * c + k[j] * sn;
        end
        quant8(kr, tmp);
        for (int i = 0; i < DH; i++) kc[l][h][p][i] = tmp[i];
        quant8(v, tmp);
        for (int i = 0; i < DH; i++) vc[l][h][p][i] = tmp[i];
        mx = -1.0e30;
        for (int t = 0; t <= p; t++) begin
          sc[t] = 0.0;
          for (int i = 0; i < DH; i++) sc[t] += qr[i] * ((t == p) ? kr[i] : kc[l][h][t][i]);
          sc[t] = sc[t] / $sqrt(real'(DH));
          if (sc[t] > mx) mx = sc[t];
        end
        den = 0.0;
        for (int t = 0; t <= p; t++) begin sc[t] = $exp(sc[t] - mx); den += sc[t]; end
        for (int i = 0; i < DH; i++) begin
          a = 0.0;
          for (int t = 0; t <= p; t++) a += sc[t] / den * vc[l][h][t][i];
          att[h * DH + i] = a;
        end
      end
      for (int r = 0; r < H; r++) begin
        a = 0.0;
        for (int i = 0; i < H; i++) a += wo[l][r * H + i] * att[i];
        x[r] += a;
      end
      rmsn(x, ln2[l], hn);
      for (int r = 0; r < F; r++) begin
        g = 0.0; u = 0.0;
        for (int i = 0; i < H; i++) begin
          g += wg[l][r * H + i] * hn[i];
          u += wu[l][r * H + i] * hn[i];
        end
        act[r] = g / (1.0 + $exp(-g)) * u;
      end
      for (int r = 0; r < H; r++) begin
        a = 0.0;
        for (int i = 0; i < F; i++) a += wd[l][r * F + i] * act[i];
        x[r] += a;
      end
    end
    if (want_logits) begin
      rmsn(x, lnf, hn);
      for (int r = 0; r < V; r++) begin
        a = 0.0;
        for (int i = 0; i < H; i++) a += wlm[r * H + i] * hn[i];
        ref_logits[r] = a;
      end
    end
  endtask

  // ---------------- host ----------------
  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk); awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    do @(posedge clk); while (!awready);
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  // ---------------- observation ----------------
  real hw_logits [V];
  int  n_logits = 0;
  always_ff @(posedge clk) begin
    if (rst_n && logit_valid) begin
      hw_logits[logit_idx] = h2r(logit_data);
      n_logits <= n_logits + 1;
    end
  end

  int m_skew = 0, m_opstall = 0, m_raw = 0, m_flush = 0, m_onchip = 0, m_bypass = 0;
  int m_kcskip = 0, m_local = 0, m_vc = 0, m_lmskip = 0, m_ovf = 0;
  int raw_idle = 0;   // cycles the value-cache command is held and no beat flows
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (dut.sync_stall) m_skew <= m_skew + 1;
      if (dut.vb_valid && dut.dq_in_ready && !dut.op_avail) m_opstall <= m_opstall + 1;
      if (dut.cg_valid && dut.cg_cmd.mat == M_VC && !dut.gate_ok) m_raw <= m_raw + 1;
      if (dut.cg_valid && dut.cg_cmd.mat == M_VC && !dut.gate_ok && !dut.vb_valid) raw_idle <= raw_idle + 1;
      if (dut.k_lv || dut.v_lv) m_flush <= m_flush + 1;
      if (dut.dq_valid && dut.dm_cmd_ready && dut.dq_cmd.kind == K_KV8 && dut.dq_cmd.rows[3:0] != 4'd0)
        m_onchip <= m_onchip + 1;
      if (dut.rs_sq_valid) m_bypass <= m_bypass + 1;
      if (dut.loc_push) m_local <= m_local + 1;
      if (dut.vec_valid) m_vc <= m_vc + 1;
      if (kv_overflow) m_ovf <= m_ovf + 1;
    end
  end

  function automatic real fabs(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  function automatic void expect_cnt(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("  never happened"); end
  endfunction

  initial begin
    int tok, quiet, kc_cmds, wr0;
    real mxr, err, maxerr;
    logic [31:0] st;
    awvalid = 0; wvalid = 0; awaddr = '0; wdata = '0; bready = 1; arvalid = 0; araddr = '0; rready = 1;
    for (int k = 0; k < 4; k++) p_cnt[k] = 0;
    build_model();
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int p = 0; p < NT; p++) begin
      tok = $urandom % V;
      ref_token(tok, p, p >= NPRE);
      n_logits = 0; kc_cmds = 0; wr0 = n_wr;
      axil_write(8'h04, 32'(tok));
      axil_write(8'h08, 32'(p));
      axil_write(8'h0C, (p < NPRE) ? 32'd1 : 32'd0);
      axil_write(8'h00, 32'd1);
      // wait for the command stream to end and the pipeline to drain
      quiet = 0;
      while (quiet < 800) begin
        @(posedge clk);
        if (dut.dq_valid && dut.dm_cmd_ready && dut.dq_cmd.mat == M_KC) kc_cmds++;
        if (busy || dut.res_valid || dut.vec_valid || dut.rn_out_valid || dut.kq_valid ||
            dut.kvq_out_valid || wr_valid || dut.sm_out_valid) quiet = 0;
        else quiet++;
      end
      axil_read(8'h10, st);
      checks++;
      if (st[0] != 1'b0 || int'(st[31:16]) != p + 1) begin
        failures++; $display("status %h after token %0d", st, p);
      end
      // KV words written: 2 key and 2 value words per layer and head, plus lines
      checks++;
      if (n_wr - wr0 != 4 * L * NH + ((p % 16 == 15) ? 2 * L * NH : 0)) begin
        failures++; $display("token %0d: %0d cache writes", p, n_wr - wr0);
      end
      if (p == 0) begin
        checks++;
        if (kc_cmds != 0) begin failures++; $display("key cache read at position 0"); end
        else m_kcskip++;
      end
      if (p < NPRE) begin
        checks++;
        if (n_logits != 0) begin failures++; $display("logits for a prompt token"); end
        else m_lmskip++;
      end else begin
        checks++;
        if (n_logits != V) begin failures++; $display("token %0d: %0d logits", p, n_logits); end
        mxr = 0.0;
        for (int r = 0; r < V; r++) if (fabs(ref_logits[r]) > mxr) mxr = fabs(ref_logits[r]);
        maxerr = 0.0;
        for (int r = 0; r < V; r++) begin
          err = fabs(hw_logits[r] - ref_logits[r]);
          if (err > maxerr) maxerr = err;
          checks++;
          if (err > 0.04 * mxr + 0.02) begin
            failures++;
            if (failures < 10) $display("token %0d logit %0d: %f want %f", p, r, hw_logits[r], ref_logits[r]);
          end
        end
        $display("token %0d (pos %0d): max |logit| %f, max error %f", tok, p, mxr, maxerr);
      end
    end
    expect_cnt("port skew stall", m_skew);
    expect_cnt("operand stall", m_opstall);
    expect_cnt("value read-after-write wait", m_raw);
    $display("value read-after-write: %0d idle stream cycles, %0d per head", raw_idle, raw_idle / (NT * L * NH));
    expect_cnt("scale-zero line flush", m_flush);
    expect_cnt("on-chip scale-zero line", m_onchip);
    expect_cnt("RMSNorm pass-1 bypass", m_bypass);
    expect_cnt("key read skipped at pos 0", m_kcskip);
    expect_cnt("local score", m_local);
    expect_cnt("weighted-sum (V) mode", m_vc);
    expect_cnt("LM head skipped (prefill)", m_lmskip);
    checks++;
    if (m_ovf != 0) begin failures++; $display("write queue overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
