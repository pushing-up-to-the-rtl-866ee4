// tb_kv_to_mem: writes quantized K and V vectors of several tokens and
// entries, plus scale-zero lines (one arriving in the same cycle as a word),
// through the unit with a slow memory side, and checks every 64-byte write
// against the expected address (cache layout) and data, in order.
module tb_kv_to_mem;
  localparam int H = 4, MC = 64, E = 8;
  localparam logic [31:0] KB = 32'h1000_0000, VB = 32'h2000_0000;
  localparam int BLK = 2112, HB = (MC / 16) * BLK;
  logic clk = 0, rst_n = 0;
  logic b_valid, ctx_is_v, l_valid, l_is_v, w_valid, w_ready, overflow;
  logic [7:0] b_data;
  logic [6:0] b_idx;
  logic [$clog2(E)-1:0] ctx_entry, l_entry;
  logic [15:0] ctx_tok, l_blk;
  logic [511:0] l_line, w_data;
  logic [31:0] w_addr;
  int checks = 0, failures = 0;
  logic [31:0]  ea [$];
  logic [511:0] ed [$];

  kv_to_mem #(.HEADS(H), .MAX_CTX(MC), .ENTRIES(E), .K_BASE(KB), .V_BASE(VB), .QDEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) w_ready <= ($urandom % 2) == 0;

  always_ff @(posedge clk) begin
    if (rst_n && w_valid && w_ready) begin
      checks++;
      if (ea.size() == 0 || w_addr != ea[0] || w_data != ed[0]) begin
        failures++; $display("write %h, want %h", w_addr, (ea.size() > 0) ? ea[0] : 32'h0);
      end
      if (ea.size() > 0) begin void'(ea.pop_front()); void'(ed.pop_front()); end
    end
  end

  task automatic vec(bit v, int e, int t, bit with_line);
    logic [1023:0] bytes;
    for (int i = 0; i < 32; i++) bytes[32*i +: 32] = $urandom;
    ctx_is_v = v; ctx_entry = ($clog2(E))'(e); ctx_tok = 16'(t);
    for (int h = 0; h < 2; h++) begin
      ea.push_back((v ? VB : KB) + 32'(e * HB + (t / 16) * BLK + 64 + (t % 16) * 128 + 64 * h));
      ed.push_back(bytes[512*h +: 512]);
    end
    if (with_line) begin
      l_line = {16{$urandom}};
      ea.push_back((v ? VB : KB) + 32'(e * HB + (t / 16) * BLK));
      ed.push_back(l_line);
    end
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      b_valid = 1; b_data = bytes[8*i +: 8]; b_idx = 7'(i);
      l_valid = with_line && (i == 127); l_is_v = v; l_entry = ($clog2(E))'(e); l_blk = 16'(t / 16);
    end
    @(negedge clk); b_valid = 0; l_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    b_valid = 0; l_valid = 0; b_data = '0; b_idx = '0; ctx_is_v = 0; ctx_entry = '0; ctx_tok = '0;
    l_is_v = 0; l_entry = '0; l_blk = '0; l_line = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    vec(0, 0, 0, 0);
    vec(1, 3, 5, 0);
    vec(0, 7, 15, 1);
    vec(1, 2, 31, 1);
    vec(0, 1, 40, 0);
    repeat (20) @(posedge clk);
    checks++;
    if (ea.size() != 0 || overflow) begin failures++; $display("%0d writes missing, overflow %0d", ea.size(), overflow); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
