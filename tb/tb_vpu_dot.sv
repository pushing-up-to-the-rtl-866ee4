// tb_vpu_dot: feeds back-to-back beats of random weights (q - z) and random
// activations for 6 rows of 512 (4 slices each, each slice with its own
// scale) and compares every row result with a double-precision dot product
// (relative tolerance 1%), checks one result per 4 beats and the 10-cycle
// latency; then runs the value-cache mode over 20 tokens and compares the 128
// lane sums with sum_t p_t * s_t * w_t,i.
module tb_vpu_dot;
  import llm_pkg::*;
  import tb_fp16_pkg::*;
  localparam int L = 128, ROWS = 6, G = 4, T = 20;
  logic clk = 0, rst_n = 0;
  logic in_valid, res_valid, vec_valid;
  vbeat_t in_meta, res_meta, vec_meta;
  fp16_t in_w [L], in_x [L], vec [L];
  fp16_t res;
  int checks = 0, failures = 0;
  real want [$];
  int  nres = 0, cyc = 0, last_in_cyc = 0, lat = -1;

  vpu_dot #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    if (res_valid && rst_n) begin
      checks++;
      if (!close(h2r(res), want[nres], 0.01, 0.02)) begin
        failures++; $display("row %0d: %f want %f", nres, h2r(res), want[nres]);
      end
      if (nres == ROWS - 1) lat <= cyc - last_in_cyc;
      nres <= nres + 1;
    end
  end

  initial begin
    real xr [G][L];
    real acc, part;
    fp16_t xh [G][L];
    real pv [T], sv [T], vw [T][L];
    for (int g = 0; g < G; g++)
      for (int i = 0; i < L; i++) begin
        xh[g][i] = r2h((real'($urandom % 2001) - 1000.0) / 1000.0);
        xr[g][i] = h2r(xh[g][i]);
      end
    in_valid = 0; in_meta = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      acc = 0.0;
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        in_valid = 1;
        in_meta = '0; in_meta.kind = K_W4; in_meta.mat = M_WQ;
        in_meta.scale = r2h(real'($urandom % 100 + 1) / 1000.0);
        in_meta.chunk = 7'(g); in_meta.last = (g == G - 1);
        part = 0.0;
        for (int i = 0; i < L; i++) begin
          int w;
          w = int'($urandom % 16) - int'($urandom % 16);
          in_w[i] = r2h(real'(w));
          in_x[i] = xh[g][i];
          part += real'(w) * xr[g][i];
        end
        acc += part * h2r(in_meta.scale);
        if (r == ROWS - 1 && g == G - 1) last_in_cyc = cyc;
      end
      want.push_back(acc);
    end
    @(negedge clk); in_valid = 0;
    repeat (15) @(posedge clk);
    checks++;
    if (nres != ROWS) begin failures++; $display("got %0d rows", nres); end
    checks++;
    if (lat != 10) begin failures++; $display("latency %0d", lat); end

    // value-cache mode
    for (int t = 0; t < T; t++) begin
      pv[t] = real'($urandom % 1000) / 1000.0 / T;
      sv[t] = real'($urandom % 100 + 1) / 100.0;
      for (int i = 0; i < L; i++) vw[t][i] = real'(int'($urandom % 256) - 128);
    end
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      in_valid = 1;
      in_meta = '0; in_meta.kind = K_KV8; in_meta.mat = M_VC;
      in_meta.tok = 11'(t); in_meta.scale = r2h(sv[t]); in_meta.last = (t == T - 1);
      for (int i = 0; i < L; i++) begin
        in_w[i] = r2h(vw[t][i]);
        in_x[i] = (i == t) ? r2h(pv[t]) : 16'h0000;
      end
    end
    @(negedge clk); in_valid = 0;
    while (!vec_valid) @(posedge clk);
    for (int i = 0; i < L; i++) begin
      real w;
      w = 0.0;
      for (int t = 0; t < T; t++) w += h2r(r2h(pv[t])) * h2r(r2h(sv[t])) * vw[t][i];
      checks++;
      if (!close(h2r(vec[i]), w, 0.01, 0.05)) begin
        failures++; if (failures < 10) $display("lane %0d: %f want %f", i, h2r(vec[i]), w);
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
