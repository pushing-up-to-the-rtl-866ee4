// tb_softmax: runs score vectors of length 1, 17 and 64 (the configured
// maximum) through the softmax and compares every probability with
// exp(x_i - max) / sum exp(x_j - max) in double precision; checks the output
// indices, out_last, and the three-pass timing (last output 2L+2 cycles after
// the last score).
module tb_softmax;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int M = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_last;
  fp16_t in_data, out_data;
  logic [15:0] out_idx;
  int checks = 0, failures = 0;
  real x [M], want [M];
  int nout = 0, cyc = 0, end_cyc = 0, in_last_cyc = 0;

  softmax #(.MAX_LEN(M)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    if (out_valid && rst_n) begin
      checks++;
      if (int'(out_idx) != nout || !close(h2r(out_data), want[out_idx], 0.02, 0.002)) begin
        failures++;
        if (failures < 10) $display("idx %0d: %f want %f", out_idx, h2r(out_data), want[out_idx]);
      end
      if (out_last) end_cyc <= cyc;
      nout <= nout + 1;
    end
  end

  task automatic run(int L);
    real mx, d;
    for (int i = 0; i < L; i++) x[i] = h2r(r2h((real'($urandom % 1601) - 800.0) / 100.0));
    mx = x[0];
    for (int i = 1; i < L; i++) if (x[i] > mx) mx = x[i];
    d = 0.0;
    for (int i = 0; i < L; i++) d += $exp(x[i] - mx);
    for (int i = 0; i < L; i++) want[i] = $exp(x[i] - mx) / d;
    nout = 0;
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_data = r2h(x[i]); in_last = (i == L - 1);
      if (i == L - 1) in_last_cyc = cyc;
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    while (nout < L) @(posedge clk);
    @(posedge clk);
    checks++;
    if (end_cyc - in_last_cyc != 2 * L + 2) begin failures++; $display("L=%0d: %0d cycles", L, end_cyc - in_last_cyc); end
  endtask

  initial begin
    in_valid = 0; in_data = '0; in_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1); run(17); run(M); run(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
