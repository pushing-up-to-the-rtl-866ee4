// tb_qk_local: stores a random rotated query, streams the key in a scrambled
// order and checks the single score against the double-precision dot product;
// repeated for several heads.
module tb_qk_local;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int D = 128;
  logic clk = 0, rst_n = 0;
  logic q_valid, k_valid, score_valid;
  fp16_t q_data, k_data, score;
  logic [6:0] q_idx, k_idx;
  int checks = 0, failures = 0, nscore = 0;
  real want;

  qk_local #(.D(D)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (rst_n && score_valid) begin
      checks++; nscore <= nscore + 1;
      if (!close(h2r(score), want, 0.02, 0.05)) begin failures++; $display("score %f want %f", h2r(score), want); end
    end
  end

  initial begin
    real q [D], k [D];
    q_valid = 0; k_valid = 0; q_data = '0; k_data = '0; q_idx = '0; k_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int hd = 0; hd < 5; hd++) begin
      want = 0.0;
      for (int i = 0; i < D; i++) begin
        q[i] = h2r(r2h((real'($urandom % 2001) - 1000.0) / 1000.0));
        k[i] = h2r(r2h((real'($urandom % 2001) - 1000.0) / 1000.0));
        want += q[i] * k[i];
      end
      for (int i = 0; i < D; i++) begin
        @(negedge clk); q_valid = 1; q_data = r2h(q[i]); q_idx = 7'(i);
      end
      @(negedge clk); q_valid = 0;
      for (int i = 0; i < D; i++) begin
        int j;
        j = (i * 5 + 3) % D;
        @(negedge clk); k_valid = 1; k_data = r2h(k[j]); k_idx = 7'(j);
      end
      @(negedge clk); k_valid = 0;
      repeat (2) @(posedge clk);
    end
    checks++;
    if (nscore != 5) begin failures++; $display("%0d scores", nscore); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
