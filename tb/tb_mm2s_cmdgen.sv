// tb_mm2s_cmdgen: checks the command sequence of one token against a list
// built here from the memory map: order, kind, matrix, layer, head, address,
// length and rows of every command, for a prompt token at position 0 (no key
// read, no LM head) and for a generated token at position 21 (key read of 21
// tokens, value read of 22 tokens, LM head). cmd_ready is random, and a
// command must hold while it waits.
module tb_mm2s_cmdgen;
  import llm_pkg::*;
  localparam int H = 256, NH = 2, L = 2, F = 256, V = 128, CTX = 32;
  localparam longint KB = 64'hE000_0000, VB = 64'hE840_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, is_prefill, cmd_valid, cmd_ready, busy;
  logic [15:0] token_id, pos;
  cmd_t cmd;
  int checks = 0, failures = 0;

  mm2s_cmdgen #(.HIDDEN(H), .HEADS(NH), .HEAD_DIM(128), .LAYERS(L), .FFN(F), .VOCAB(V),
                .MAX_CTX(CTX)) dut (.*);

  cmd_t exp_q [$];

  function automatic longint w4(longint r, longint c);
    return r * c / 16384 * 133 * 64;
  endfunction
  function automatic void push(kind_e k, mat_e m, int l, int h, longint a, longint b, int rows);
    cmd_t c;
    c = '0; c.kind = k; c.mat = m; c.layer = 5'(l); c.head = 5'(h);
    c.addr = 32'(a); c.bytes = 23'(b); c.rows = 16'(rows);
    exp_q.push_back(c);
  endfunction

  task automatic build(int tok, int p, bit pre);
    longint vb, eb, lb, sq, hq, ff, lay, kvh, e;
    vb = 2 * H; eb = V * vb; sq = w4(H, H); hq = w4(128, H); ff = w4(F, H);
    lay = 2 * vb + 4 * sq + 3 * ff; kvh = (CTX / 16) * 2112;
    push(K_RAW, M_LN1, 0, 0, eb, vb, H);
    push(K_RAW, M_EMB, 0, 0, tok * vb, vb, H);
    for (int l = 0; l < L; l++) begin
      lb = eb + l * lay;
      for (int h = 0; h < NH; h++) begin
        e = (l * NH + h) * kvh;
        push(K_W4, M_WQ, l, h, lb + 2 * vb + h * hq, hq, 128);
        push(K_W4, M_WK, l, h, lb + 2 * vb + sq + h * hq, hq, 128);
        if (p > 0) push(K_KV8, M_KC, l, h, KB + e, 64 * ((p + 15) / 16) + 128 * p, p);
        push(K_W4, M_WV, l, h, lb + 2 * vb + 2 * sq + h * hq, hq, 128);
        push(K_KV8, M_VC, l, h, VB + e, 64 * ((p + 16) / 16) + 128 * (p + 1), p + 1);
      end
      push(K_RAW, M_LN2, l, 0, lb + vb, vb, H);
      push(K_W4, M_WO, l, 0, lb + 2 * vb + 3 * sq, sq, H);
      push(K_W4, M_WG, l, 0, lb + 2 * vb + 4 * sq, ff, F);
      push(K_W4, M_WU, l, 0, lb + 2 * vb + 4 * sq + ff, ff, F);
      if (l == L - 1) push(K_RAW, M_LNF, l, 0, eb + L * lay, vb, H);
      else push(K_RAW, M_LN1, l, 0, lb + lay, vb, H);
      push(K_W4, M_WD, l, 0, lb + 2 * vb + 4 * sq + 2 * ff, ff, H);
    end
    if (!pre) push(K_W4, M_LM, L - 1, 0, eb + L * lay + vb, w4(V, H), V);
  endtask

  cmd_t held;
  logic was_stalled;
  always_ff @(posedge clk) begin
    cmd_ready <= ($urandom % 3) != 0;
    if (rst_n) begin
      if (was_stalled) begin
        checks++;
        if (cmd != held) begin failures++; $display("command changed while waiting"); end
      end
      was_stalled <= cmd_valid && !cmd_ready;
      held <= cmd;
      if (cmd_valid && cmd_ready) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("extra command %p", cmd); end
        else begin
          // rows/layer/head are compared; cols only for weight matrices
          if (cmd.kind != exp_q[0].kind || cmd.mat != exp_q[0].mat || cmd.addr != exp_q[0].addr ||
              cmd.bytes != exp_q[0].bytes || cmd.rows != exp_q[0].rows ||
              (cmd.mat != M_LN2 && cmd.mat != M_WO && cmd.mat != M_WG && cmd.mat != M_WU &&
               cmd.mat != M_WD && cmd.mat != M_LM && cmd.mat != M_LNF && cmd.mat != M_LN1 &&
               cmd.mat != M_EMB && (cmd.layer != exp_q[0].layer || cmd.head != exp_q[0].head))) begin
            failures++;
            $display("got %s a=%h b=%0d r=%0d  want %s a=%h b=%0d r=%0d", cmd.mat.name(), cmd.addr,
                     cmd.bytes, cmd.rows, exp_q[0].mat.name(), exp_q[0].addr, exp_q[0].bytes, exp_q[0].rows);
          end
          void'(exp_q.pop_front());
        end
      end
    end else was_stalled <= 1'b0;
  end

  task automatic run(int tok, int p, bit pre);
    build(tok, p, pre);
    @(negedge clk); start = 1; token_id = 16'(tok); pos = 16'(p); is_prefill = pre;
    @(negedge clk); start = 0;
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d commands missing", exp_q.size()); end
    exp_q.delete();
  endtask

  initial begin
    start = 0; token_id = '0; pos = '0; is_prefill = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(7, 0, 1'b1);
    run(99, 21, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
