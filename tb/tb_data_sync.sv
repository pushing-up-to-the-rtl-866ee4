// tb_data_sync: drives the four port streams with independent random gaps and
// checks that every 512-bit word is the concatenation of beat n of each port,
// in order, that a lagging port raises `stall`, and that with all ports
// streaming the output carries one word per cycle.
module tb_data_sync;
  localparam int N = 4, W = 128, NW = 200;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] s_valid, s_ready;
  logic [N-1:0][W-1:0] s_data;
  logic m_valid, m_ready, stall;
  logic [N*W-1:0] m_data;
  int checks = 0, failures = 0;
  int sent [N];
  int got = 0, stalls = 0;
  bit random_mode = 1;

  data_sync #(.N_PORTS(N), .PORT_W(W), .DEPTH(8)) dut (.*);

  always #5 clk = ~clk;

  always_comb
    for (int k = 0; k < N; k++) s_data[k] = {32'(k), 32'(sent[k]), 64'hA5A5_0000_0000_0000 + 64'(sent[k] * 7 + k)};

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N; k++)
        if (s_valid[k] && s_ready[k]) sent[k] <= sent[k] + 1;
      if (stall) stalls <= stalls + 1;
      if (m_valid && m_ready) begin
        for (int k = 0; k < N; k++) begin
          checks++;
          if (m_data[k*W +: W] != {32'(k), 32'(got), 64'hA5A5_0000_0000_0000 + 64'(got * 7 + k)}) begin
            failures++;
            $display("mismatch word %0d port %0d", got, k);
          end
        end
        got <= got + 1;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) s_valid[k] = rst_n && (sent[k] < NW) && (!random_mode || (($urandom % 4) != 0) || k == 0);
    m_ready = rst_n && (!random_mode || ($urandom % 3 != 0));
  end

  initial begin
    int t0;
    for (int k = 0; k < N; k++) sent[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got == NW);
    @(posedge clk);
    checks++; if (stalls == 0) begin failures++; $display("no stall seen"); end
    // throughput: all ports streaming, sink always ready
    random_mode = 0;
    for (int k = 0; k < N; k++) sent[k] = 0;
    got = 0;
    t0 = $time;
    wait (got == NW);
    checks++;
    if (($time - t0) / 10 > NW + 4) begin failures++; $display("slow: %0d cycles", ($time - t0) / 10); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
