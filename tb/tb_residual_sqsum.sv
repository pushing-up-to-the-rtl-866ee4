// tb_residual_sqsum: loads a random 128-element hidden vector, then adds two
// random projection outputs in scrambled index order, checking each new value
// against the running double-precision sum and the mean square that leaves
// with the last element.
module tb_residual_sqsum;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_add, in_last, out_valid, out_last, sq_valid;
  fp16_t in_data, out_data, sq_sum;
  logic [15:0] in_idx, out_idx;
  int checks = 0, failures = 0;
  real h [N];
  real ss;
  int nsq = 0;

  residual_sqsum #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (!close(h2r(out_data), h[out_idx], 0.003, 0.003)) begin
        failures++; if (failures < 10) $display("idx %0d: %f want %f", out_idx, h2r(out_data), h[out_idx]);
      end
    end
    if (rst_n && sq_valid) begin
      checks++; nsq <= nsq + 1;
      if (!close(h2r(sq_sum), ss / N, 0.02, 0.001)) begin failures++; $display("mean square %f want %f", h2r(sq_sum), ss / N); end
    end
  end

  task automatic pass(bit add);
    int perm [N];
    for (int i = 0; i < N; i++) perm[i] = (i * 37) % N;
    for (int i = 0; i < N; i++) begin
      real v;
      int k;
      k = perm[i];
      v = h2r(r2h((real'($urandom % 2001) - 1000.0) / 1000.0));
      h[k] = add ? h2r(r2h(h[k] + v)) : v;
      @(negedge clk);
      in_valid = 1; in_add = add; in_data = r2h(v); in_idx = 16'(k); in_last = (i == N - 1);
      if (i == N - 1) begin
        ss = 0.0;
        for (int j = 0; j < N; j++) ss += h[j] * h[j];
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_add = 0; in_last = 0; in_data = '0; in_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    pass(0); pass(1); pass(1);
    checks++;
    if (nsq != 3) begin failures++; $display("%0d square sums", nsq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
