// tb_stream_demux: builds, from random per-group weights, zero points and
// scales, the interleaved weight stream (zero-point beat, then 4 x [scale
// beat, 32 weight beats]), a KV-cache stream of 21 and of 32 tokens, and a
// raw FP16 vector, and checks that each weight/cache beat comes out with its
// own zero point, scale, slice index and row end, that a partial last cache
// block takes its scale-zero line from the on-chip input, and that the raw
// vector comes out element by element.
module tb_stream_demux;
  import llm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic s_valid, s_ready;
  logic [511:0] s_data, cur_sz_line;
  logic vb_valid, vb_ready;
  vbeat_t vb;
  logic raw_valid, raw_ready, raw_last, busy;
  fp16_t raw_data;
  logic [15:0] raw_idx;
  mat_e raw_mat;
  int checks = 0, failures = 0;

  stream_demux dut (.*);
  always #5 clk = ~clk;

  // reference data
  localparam int R = 12, C = 1408, G = C / 128, NG = R * G;
  logic [511:0] wq [NG];
  logic [3:0]   zq [NG];
  fp16_t        sc [NG];
  logic [511:0] stream [$];
  logic [511:0] exp_q [$];
  logic [7:0]   exp_zp [$];
  fp16_t        exp_sc [$];
  int           exp_chunk [$];
  bit           exp_last [$];
  int           exp_tok [$];
  bit           exp_half [$];
  fp16_t        exp_raw [$];

  task automatic build_w4();
    logic [511:0] b;
    for (int g = 0; g < NG; g++) begin
      for (int w = 0; w < 16; w++) wq[g][32*w +: 32] = $urandom;
      zq[g] = 4'($urandom);
      sc[g] = 16'($urandom) & 16'h3FFF;
    end
    for (int g = 0; g < NG; g++) begin
      if (g % 128 == 0) begin
        b = '0;
        for (int j = 0; j < 128 && g + j < NG; j++) b[4*j +: 4] = zq[g + j];
        stream.push_back(b);
      end
      if (g % 32 == 0) begin
        b = '0;
        for (int j = 0; j < 32 && g + j < NG; j++) b[16*j +: 16] = sc[g + j];
        stream.push_back(b);
      end
      stream.push_back(wq[g]);
      exp_q.push_back(wq[g]); exp_zp.push_back({4'd0, zq[g]}); exp_sc.push_back(sc[g]);
      exp_chunk.push_back(g % G); exp_last.push_back((g % G) == G - 1);
      exp_tok.push_back(0); exp_half.push_back(0);
    end
  endtask

  task automatic build_kv(int T, logic [511:0] onchip, bit vc);
    logic [511:0] line, b;
    for (int blk = 0; blk * 16 < T; blk++) begin
      for (int j = 0; j < 16; j++) line[32*j +: 32] = {8'h00, 8'($urandom), 16'($urandom) & 16'h3FFF};
      stream.push_back(line);
      if (blk * 16 + 16 > T) line = onchip;
      for (int t = blk * 16; t < T && t < blk * 16 + 16; t++) begin
        for (int h = 0; h < 2; h++) begin
          for (int w = 0; w < 16; w++) b[32*w +: 32] = $urandom;
          stream.push_back(b);
          exp_q.push_back(b); exp_zp.push_back(line[32*(t%16) + 16 +: 8]);
          exp_sc.push_back(line[32*(t%16) +: 16]);
          exp_chunk.push_back(vc ? t / 128 : 0); exp_last.push_back(h == 1 && (!vc || t == T - 1));
          exp_tok.push_back(t); exp_half.push_back(h == 1);
        end
      end
    end
  endtask

  task automatic build_raw(int E);
    logic [511:0] b;
    for (int e = 0; e < E; e += 32) begin
      for (int j = 0; j < 32; j++) begin
        b[16*j +: 16] = 16'($urandom);
        if (e + j < E) exp_raw.push_back(b[16*j +: 16]);
      end
      stream.push_back(b);
    end
  endtask

  // stream source with random gaps
  always_ff @(posedge clk) begin
    if (s_valid && s_ready) void'(stream.pop_front());
  end
  assign s_data  = (stream.size() > 0) ? stream[0] : '0;
  logic gap;
  always_ff @(posedge clk) gap <= ($urandom % 5) == 0;
  assign s_valid = rst_n && (stream.size() > 0) && !gap;
  always_ff @(posedge clk) vb_ready <= ($urandom % 4) != 0;
  always_ff @(posedge clk) raw_ready <= ($urandom % 4) != 0;

  int nraw = 0;
  always_ff @(posedge clk) begin
    if (vb_valid && vb_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected beat"); end
      else begin
        if (vb.q != exp_q[0] || vb.zp != exp_zp[0] || vb.scale != exp_sc[0] ||
            int'(vb.chunk) != exp_chunk[0] || vb.last != exp_last[0] ||
            (vb.kind == K_KV8 && (int'(vb.tok) != exp_tok[0] || vb.half != exp_half[0]))) begin
          failures++;
          $display("beat mismatch: zp %h/%h sc %h/%h chunk %0d/%0d last %0d/%0d tok %0d/%0d",
                   vb.zp, exp_zp[0], vb.scale, exp_sc[0], vb.chunk, exp_chunk[0], vb.last, exp_last[0], vb.tok, exp_tok[0]);
        end
        void'(exp_q.pop_front()); void'(exp_zp.pop_front()); void'(exp_sc.pop_front());
        void'(exp_chunk.pop_front()); void'(exp_last.pop_front());
        void'(exp_tok.pop_front()); void'(exp_half.pop_front());
      end
    end
    if (raw_valid && raw_ready) begin
      checks++;
      if (exp_raw.size() == 0 || raw_data != exp_raw[0] || int'(raw_idx) != nraw || raw_mat != M_EMB) begin
        failures++; $display("raw mismatch at %0d", nraw);
      end
      if (exp_raw.size() > 0) void'(exp_raw.pop_front());
      nraw <= nraw + 1;
    end
  end

  task automatic issue(cmd_t c);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd_valid = 0;
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0;
    for (int j = 0; j < 16; j++) cur_sz_line[32*j +: 32] = {8'h00, 8'(j * 3 + 1), 16'h3000 + 16'(j)};
    build_w4();
    build_kv(21, cur_sz_line, 1'b0);
    build_kv(32, cur_sz_line, 1'b1);
    build_raw(40);
    repeat (3) @(posedge clk);
    rst_n = 1;
    c = '0; c.kind = K_W4; c.mat = M_WQ; c.rows = 16'(R); c.cols = 16'(C);
    issue(c);
    c = '0; c.kind = K_KV8; c.mat = M_KC; c.rows = 16'd21;
    issue(c);
    c.mat = M_VC; c.rows = 16'd32;
    issue(c);
    c = '0; c.kind = K_RAW; c.mat = M_EMB; c.rows = 16'd40;
    issue(c);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || exp_raw.size() != 0 || stream.size() != 0) begin
      failures++; $display("left over: %0d beats, %0d raw, %0d stream", exp_q.size(), exp_raw.size(), stream.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
