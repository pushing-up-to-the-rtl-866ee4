// fp16_rsqrt: combinational 1/sqrt(x) for positive FP16 x, used by RMSNorm.
//
// With x = 1.m * 2^E and E = 2k + b (b = 0 or 1), 1/sqrt(x) =
// 1/sqrt(2^b * 1.m) * 2^-k. A 2048-entry table indexed by {b, m} holds the
// first factor in FP16, filled at start-up from the formula; the exponent is
// adjusted by -k. Zero gives infinity; the sign is ignored.
// The original names an "rsqrt" block in its RMSNorm pipeline; the table
// method is this design's choice.
module fp16_rsqrt
  import llm_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);
  fp16_t tab [2048];
  initial begin
    for (int k = 0; k < 2048; k++)
      tab[k] = fp16_from_real(1.0 / $sqrt((k >= 1024 ? 2.0 : 1.0) * (1.0 + real'(k % 1024) / 1024.0)));
  end

  always_comb begin
    int    ee, k, e;
    fp16_t t;
    ee = int'(x[14:10]) - 15;
    k  = ee >>> 1;
    t  = tab[{ee[0], x[9:0]}];
    e  = int'(t[14:10]) - k;
    if (x[14:10] == 5'd0) y = FP16_INF;
    else if (x[14:10] == 5'd31) y = FP16_ZERO;
    else if (e <= 0) y = FP16_ZERO;
    else if (e >= 31) y = FP16_INF;
    else y = {1'b0, 5'(e), t[9:0]};
  end
endmodule
