// tb_cmd_split: issues random commands and checks that each port gets
// exactly one part per command with address k*1GB + A/4 and length B/4, with
// ports accepting at different times; the input must be released only after
// all four ports have taken their part.
module tb_cmd_split;
  localparam int N = 4, NC = 100;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready;
  logic [31:0] s_addr;
  logic [22:0] s_bytes;
  logic [N-1:0] m_valid, m_ready;
  logic [N-1:0][31:0] m_addr;
  logic [N-1:0][22:0] m_bytes;
  int checks = 0, failures = 0;
  int taken [N];
  int accepted = 0;

  cmd_split #(.N_PORTS(N)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < N; k++) if (m_valid[k] && m_ready[k]) begin
        taken[k] <= taken[k] + 1;
        checks++;
        if (m_addr[k] != (32'(k) << 30) + (s_addr >> 2) || m_bytes[k] != (s_bytes >> 2)) begin
          failures++;
          $display("port %0d: addr %h bytes %0d for cmd %h/%0d", k, m_addr[k], m_bytes[k], s_addr, s_bytes);
        end
        if (taken[k] != accepted) begin failures++; $display("port %0d took twice", k); end
      end
      if (s_valid && s_ready) begin
        accepted <= accepted + 1;
        checks++;
        for (int k = 0; k < N; k++)
          if (taken[k] + ((m_valid[k] && m_ready[k]) ? 1 : 0) != accepted + 1) begin
            failures++; $display("released before port %0d took its part", k);
          end
        s_addr  <= {$urandom} & 32'hFFFF_FFC0;
        s_bytes <= 23'(($urandom % 4096 + 1) * 64);
      end
      m_ready <= 4'($urandom);
    end
  end

  initial begin
    for (int k = 0; k < N; k++) taken[k] = 0;
    s_valid = 0; s_addr = 32'h8000_0040; s_bytes = 23'd8512; m_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; s_valid = 1;
    wait (accepted == NC);
    s_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
