// tb_silu: feeds 64 gate values (over -8..8) then 64 up values and compares
// each output with g/(1+exp(-g)) * u in double precision and its index.
module tb_silu;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic gate_valid, up_valid, out_valid;
  fp16_t gate_data, up_data, out_data;
  logic [15:0] out_idx;
  int checks = 0, failures = 0;
  real g [N], u [N];
  int nout = 0;

  silu #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (out_valid && rst_n) begin
      real want;
      want = g[nout] / (1.0 + $exp(-g[nout])) * u[nout];
      checks++;
      if (int'(out_idx) != nout || !close(h2r(out_data), want, 0.02, 0.005)) begin
        failures++;
        if (failures < 10) $display("idx %0d: %f want %f", out_idx, h2r(out_data), want);
      end
      nout <= nout + 1;
    end
  end

  initial begin
    gate_valid = 0; up_valid = 0; gate_data = '0; up_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      g[i] = h2r(r2h(-8.0 + 16.0 * real'(i) / N + real'($urandom % 100) / 1000.0));
      u[i] = h2r(r2h((real'($urandom % 2001) - 1000.0) / 500.0));
      @(negedge clk); gate_valid = 1; gate_data = r2h(g[i]);
    end
    @(negedge clk); gate_valid = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); up_valid = (i % 3 != 2); up_data = r2h(u[i]);
      if (i % 3 == 2) begin @(negedge clk); up_valid = 1; end
    end
    @(negedge clk); up_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nout != N) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
