// fp16_recip: combinational 1/x for FP16 x, used for the divisions in softmax,
// SiLU and quantization (a/b = a * (1/b)).
//
// The significand 1.m indexes a 1024-entry table of 1/(1.m) in FP16, filled at
// start-up from the formula; the exponent is negated around the bias. 1/0
// gives infinity, 1/infinity gives zero, results below the normal range flush
// to zero. Error at most half a unit in the last place of the table entry.
// How the original divides is not given; this table method is this design's
// choice.
module fp16_recip
  import llm_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);
  fp16_t tab [1024];
  initial begin
    for (int k = 0; k < 1024; k++) tab[k] = fp16_from_real(1.0 / (1.0 + real'(k) / 1024.0));
  end

  always_comb begin
    int e;
    fp16_t t;
    t = tab[x[9:0]];
    e = int'(t[14:10]) + 15 - int'(x[14:10]);
    if (x[14:10] == 5'd0) y = {x[15], FP16_INF[14:0]};
    else if (x[14:10] == 5'd31) y = {x[15], 15'd0};
    else if (e <= 0) y = {x[15], 15'd0};
    else if (e >= 31) y = {x[15], FP16_INF[14:0]};
    else y = {x[15], 5'(e), t[9:0]};
  end
endmodule
