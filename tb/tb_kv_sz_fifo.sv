// tb_kv_sz_fifo: with 6 (layer, head) entries, pushes one pack per entry per
// token for 40 tokens and checks that the head element always holds exactly
// the packs of the earlier tokens of the current block, that a full line
// (16 packs in token order) leaves for every entry at tokens 15 and 31 and
// at no other time, with the right entry and block numbers.
module tb_kv_sz_fifo;
  localparam int D = 6, S = 16, T = 40;
  logic clk = 0, rst_n = 0;
  logic clear, pack_valid, line_valid;
  logic [31:0] pack;
  logic [511:0] head_line, line;
  logic [$clog2(D)-1:0] line_entry;
  logic [15:0] line_blk;
  int checks = 0, failures = 0, nlines = 0;
  logic [31:0] pk [T][D];

  kv_sz_fifo #(.DEPTH(D), .SLOTS(S)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    clear = 0; pack_valid = 0; pack = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++)
      for (int e = 0; e < D; e++) begin
        pk[t][e] = {8'h00, 8'(t), 8'(e), 8'($urandom)};
        @(negedge clk);
        // head element must hold packs of tokens (t - t%16) .. t-1
        for (int s = 0; s < S; s++) begin
          logic [31:0] w;
          w = (s < t % S) ? pk[t - t % S + s][e] : 32'h0;
          checks++;
          if (head_line[32*s +: 32] != w) begin
            failures++; if (failures < 10) $display("t %0d e %0d slot %0d: %h want %h", t, e, s, head_line[32*s +: 32], w);
          end
        end
        pack_valid = 1; pack = pk[t][e];
        @(negedge clk);
        pack_valid = 0;
        checks++;
        if (line_valid != (t % S == S - 1)) begin failures++; $display("line_valid wrong at t %0d", t); end
        if (line_valid) begin
          nlines++;
          checks++;
          if (int'(line_entry) != e || int'(line_blk) != t / S) begin failures++; $display("line tag wrong"); end
          for (int s = 0; s < S; s++) begin
            checks++;
            if (line[32*s +: 32] != pk[t - S + 1 + s][e]) begin failures++; $display("line slot %0d wrong", s); end
          end
        end
      end
    checks++;
    if (nlines != 2 * D) begin failures++; $display("%0d lines", nlines); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
