// fp16_exp: combinational e^x for FP16 x, used by softmax and SiLU.
//
// x is turned into a fixed-point number (20 fraction bits), multiplied by
// log2(e) and split into an integer part n and a 10-bit fraction f; then
// e^x = 2^n * 2^(f/1024), with 2^(f/1024) taken from a 1024-entry table of
// FP16 significands filled at start-up from the formula. Results below the
// smallest normal FP16 number flush to zero, results above the largest
// saturate to infinity. Relative error below one unit in the last place.
// The original design names an exponential unit in its softmax and SiLU
// pipelines but not how it works; this table method is this design's choice.
module fp16_exp
  import llm_pkg::*;
(
  input  fp16_t x,
  output fp16_t y
);
  localparam longint LOG2E_Q20 = 64'd1512775;   // round(log2(e) * 2^20)

  logic [9:0] tab [1024];
  initial begin
    for (int k = 0; k < 1024; k++) begin
      fp16_t h;
      h = fp16_from_real(2.0 ** (real'(k) / 1024.0));
      tab[k] = (h[14:10] == 5'd16) ? 10'h3FF : h[9:0];
    end
  end

  always_comb begin
    int     ex, n;
    longint fx, prod;
    logic [9:0] f;
    ex = int'(x[14:10]) - 15;
    y  = FP16_ONE;
    fx = 0; prod = 0; n = 0; f = '0;
    if (x[14:10] == 5'd0) begin
      y = FP16_ONE;
    end else if (ex >= 4) begin
      y = x[15] ? FP16_ZERO : FP16_INF;          // |x| >= 16
    end else begin
      if (ex + 10 >= 0) fx = longint'({1'b1, x[9:0]}) << (ex + 10);
      else fx = longint'({1'b1, x[9:0]}) >> (-(ex + 10));
      if (x[15]) fx = -fx;
      prod = fx * LOG2E_Q20;                      // 40 fraction bits
      n    = int'(prod >>> 40);
      f    = prod[39:30];
      if (n + 15 <= 0) y = FP16_ZERO;
      else if (n + 15 >= 31) y = FP16_INF;
      else y = {1'b0, 5'(n + 15), tab[f]};
    end
  end
endmodule
