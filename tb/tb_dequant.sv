// tb_dequant: random 4-bit weight beats and pairs of 8-bit cache beats; every
// output lane must be exactly the FP16 value of (q - z), one cycle after the
// beat (after the second beat for the cache), with the metadata passed on.
module tb_dequant;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid;
  vbeat_t in_beat, out_meta;
  fp16_t out_w [128];
  int checks = 0, failures = 0;

  dequant #(.LANES(128)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    logic [511:0] lo;
    in_valid = 0; in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      bit kv;
      kv = (n % 2 == 1);
      @(negedge clk);
      in_beat = '0;
      for (int w = 0; w < 16; w++) in_beat.q[32*w +: 32] = $urandom;
      in_beat.zp    = kv ? 8'($urandom) : {4'd0, 4'($urandom)};
      in_beat.scale = 16'($urandom);
      in_beat.chunk = 7'(n);
      in_beat.kind  = kv ? K_KV8 : K_W4;
      in_valid = 1;
      if (kv) begin
        in_beat.half = 0; lo = in_beat.q;
        @(negedge clk);
        checks++; if (out_valid) begin failures++; $display("output after first cache half"); end
        for (int w = 0; w < 16; w++) in_beat.q[32*w +: 32] = $urandom;
        in_beat.half = 1;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_meta.chunk != 7'(n) || out_meta.scale != in_beat.scale) begin
        failures++; $display("beat %0d: no output or bad meta", n);
      end
      for (int i = 0; i < 128; i++) begin
        int q;
        if (!kv) q = int'(in_beat.q[4*i +: 4]);
        else if (i < 64) q = int'(lo[8*i +: 8]);
        else q = int'(in_beat.q[8*(i-64) +: 8]);
        checks++;
        if (out_w[i] != r2h(real'(q - int'(in_beat.zp)))) begin
          failures++;
          if (failures < 10) $display("beat %0d lane %0d: %h want %h", n, i, out_w[i], r2h(real'(q - int'(in_beat.zp))));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
