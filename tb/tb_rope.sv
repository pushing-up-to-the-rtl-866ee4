// tb_rope: streams random 128-element head vectors at several token
// positions (including position 0 and large ones) into the RoPE unit and
// compares each of the 128 outputs with the rotation computed in double
// precision: out_j = x_j cos(p t_j) - x_{j+64} sin(p t_j),
// out_{j+64} = x_{j+64} cos(p t_j) + x_j sin(p t_j), t_j = 10000^(-2j/128).
// Also checks that every index appears once per head and that a pair takes
// two output cycles.
module tb_rope;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid;
  fp16_t in_data, out_data;
  logic [6:0] in_idx, out_idx;
  logic [15:0] pos;
  int checks = 0, failures = 0;
  real x [128];
  real want [128];
  int  seen [128];
  bit  extra = 0;

  rope #(.HEAD_DIM(128)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (out_valid && rst_n && !extra) begin
      checks++;
      seen[out_idx] <= seen[out_idx] + 1;
      if (!close(h2r(out_data), want[out_idx], 0.01, 0.004)) begin
        failures++;
        if (failures < 10) $display("pos %0d idx %0d: %f want %f", pos, out_idx, h2r(out_data), want[out_idx]);
      end
    end
  end

  initial begin
    int positions [6] = '{0, 1, 7, 100, 513, 1023};
    in_valid = 0; in_data = '0; in_idx = '0; pos = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (positions[p]) begin
      pos = 16'(positions[p]);
      for (int i = 0; i < 128; i++) begin
        x[i] = h2r(r2h((real'($urandom % 2001) - 1000.0) / 1000.0));
        seen[i] = 0;
      end
      for (int j = 0; j < 64; j++) begin
        real th;
        th = real'(positions[p]) * (10000.0 ** (-2.0 * real'(j) / 128.0));
        want[j]      = x[j] * $cos(th) - x[j+64] * $sin(th);
        want[j + 64] = x[j+64] * $cos(th) + x[j] * $sin(th);
      end
      for (int i = 0; i < 128; i++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_data = r2h(x[i]); in_idx = 7'(i);
        @(negedge clk);
        in_valid = 0;
      end
      repeat (4) @(posedge clk);
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (seen[i] != 1) begin failures++; $display("index %0d seen %0d times", i, seen[i]); end
      end
    end
    // back-to-back second-half input must be held off for the pair's second cycle
    extra = 1;
    @(negedge clk);
    in_valid = 1; in_idx = 7'd64; in_data = FP16_ONE;
    @(negedge clk);
    checks++;
    if (in_ready) begin failures++; $display("in_ready high while second output pending"); end
    in_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
