// tb_rmsnorm: normalizes random 256-element vectors with random norm weights
// and compares every output with x_i * w_i / sqrt(mean(x^2)) in double
// precision; checks the pass-2 length (N cycles) and that in bypass mode the
// supplied square sum is used (a sum four times too large must halve the
// outputs).
module tb_rmsnorm;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  logic bypass, sq_valid, in_valid, in_ready, in_last, lnw_we, out_valid;
  fp16_t sq_sum, in_data, lnw_data, out_data;
  logic [$clog2(N)-1:0] lnw_addr;
  logic [15:0] out_idx;
  int checks = 0, failures = 0;
  real x [N], w [N], want [N];
  int nout = 0, first_cyc = -1, last_cyc = -1, cyc = 0;

  rmsnorm #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    if (out_valid && rst_n) begin
      checks++;
      if (int'(out_idx) != nout || !close(h2r(out_data), want[out_idx], 0.02, 0.01)) begin
        failures++;
        if (failures < 10) $display("idx %0d: %f want %f", out_idx, h2r(out_data), want[out_idx]);
      end
      if (nout == 0) first_cyc <= cyc;
      last_cyc <= cyc;
      nout <= nout + 1;
    end
  end

  task automatic run(bit byp);
    real ss, r;
    ss = 0.0;
    for (int i = 0; i < N; i++) begin
      x[i] = h2r(r2h((real'($urandom % 2001) - 1000.0) / 500.0));
      ss += x[i] * x[i];
    end
    r = 1.0 / $sqrt(ss / N);
    if (byp) r = r / 2.0;
    for (int i = 0; i < N; i++) want[i] = x[i] * w[i] * r;
    nout = 0;
    bypass = byp;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = r2h(x[i]); in_last = (i == N - 1);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    if (byp) begin
      repeat (3) @(negedge clk);
      sq_valid = 1; sq_sum = r2h(4.0 * ss / N);   // mean square
      @(negedge clk); sq_valid = 0;
    end
    while (nout < N) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (last_cyc - first_cyc != N - 1) begin failures++; $display("pass 2 took %0d cycles", last_cyc - first_cyc + 1); end
  endtask

  initial begin
    bypass = 0; sq_valid = 0; sq_sum = '0; in_valid = 0; in_data = '0; in_last = 0;
    lnw_we = 0; lnw_addr = '0; lnw_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      w[i] = h2r(r2h(0.5 + real'($urandom % 1000) / 1000.0));
      @(negedge clk); lnw_we = 1; lnw_addr = ($clog2(N))'(i); lnw_data = r2h(w[i]);
    end
    @(negedge clk); lnw_we = 0;
    run(0);
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
