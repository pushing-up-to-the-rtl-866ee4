// tb_kv_quant: quantizes random 128-element head vectors (with and without
// negative values) and checks the pack's scale against (max-min)/255, its
// zero point against -ceil(min/s), each byte against round(x/s) + zp (within
// one step), that (q - zp) * s recovers x to within one step, and the output
// order and framing.
module tb_kv_quant;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_last, pack_valid;
  fp16_t in_data;
  logic [7:0] out_q;
  logic [6:0] out_idx, in_idx;
  logic [31:0] pack;
  int checks = 0, failures = 0;
  real x [N];
  int qv [N];
  int nout = 0, npack = 0;
  logic [31:0] last_pack;

  kv_quant #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (rst_n && out_valid) begin
      qv[out_idx] <= int'(out_q);
      checks++;
      if (int'(out_idx) != nout || out_last != (nout == N - 1)) begin failures++; $display("order at %0d", nout); end
      nout <= nout + 1;
    end
    if (rst_n && pack_valid) begin
      npack <= npack + 1; last_pack <= pack;
    end
  end

  task automatic run(real lo, real hi);
    real mx, mn, s, sw;
    int zp;
    mx = -1.0e9; mn = 1.0e9;
    for (int i = 0; i < N; i++) begin
      x[i] = h2r(r2h(lo + (hi - lo) * real'($urandom % 10001) / 10000.0));
      if (x[i] > mx) mx = x[i];
      if (x[i] < mn) mn = x[i];
    end
    nout = 0; npack = 0;
    for (int i = 0; i < N; i++) begin
      // elements arrive in the rotary order 0, 64, 1, 65, ...
      @(negedge clk); in_valid = 1; in_idx = 7'((i % 2 == 0) ? i / 2 : N / 2 + i / 2);
      in_data = r2h(x[in_idx]); in_last = (i == N - 1);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    while (nout < N) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (npack != 1 || last_pack[31:24] != 8'h00) begin failures++; $display("%0d packs", npack); end
    s  = h2r(last_pack[15:0]);
    sw = (mx - mn) / 255.0;
    checks++;
    if (!close(s, sw, 0.01, 1.0e-6)) begin failures++; $display("scale %f want %f", s, sw); end
    zp = -int'($ceil(mn / s));
    if (zp < 0) zp = 0;
    if (zp > 255) zp = 255;
    checks++;
    if (int'(last_pack[23:16]) - zp > 1 || zp - int'(last_pack[23:16]) > 1) begin
      failures++; $display("zero point %0d want %0d", last_pack[23:16], zp);
    end
    for (int i = 0; i < N; i++) begin
      real rec;
      rec = real'(qv[i] - int'(last_pack[23:16])) * s;
      checks++;
      if (rec - x[i] > 1.01 * s || x[i] - rec > 1.01 * s) begin
        failures++; if (failures < 10) $display("x %f recovered %f (q %0d)", x[i], rec, qv[i]);
      end
    end
  endtask

  initial begin
    in_valid = 0; in_data = '0; in_last = 0; in_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(-2.0, 2.0);
    run(-0.5, 3.0);
    run(-6.0, 0.1);
    run(-1.0, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
