// residual_sqsum: keeps the hidden state of the token on chip, adds each
// block's output projection to it as the projection is produced, and forms the
// square sum needed by the following RMSNorm at the same time.
//
// The hidden state (N FP16 values) never goes to memory. An element arriving
// with in_add = 0 replaces the stored one (the token embedding at the start of
// the model); with in_add = 1 it is added to it (the residual connection after
// the attention output projection and after the MLP down projection). Either
// way the new value is sent on (to RMSNorm) and x^2/N is added to a running
// sum, the mean square, that leaves on sq_valid/sq_sum with the last element
// (N is a power of two, so 1/N is an exact exponent shift, split in two and
// applied before squaring; accumulating the mean rather than the plain sum of
// squares keeps FP16 from overflowing until the RMS reaches 256), so that
// RMSNorm can skip its own first pass. The original shows "Residual Add" and
// "Square Sum" as steps hidden under the output projection; this module is
// this design's way of doing both.
//
// Interface: valid-only input with element index and in_last; valid-only
// output. Timing: one cycle from input to output; sq_valid in the same cycle
// as the last output.
module residual_sqsum
  import llm_pkg::*;
#(
  parameter int unsigned N = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  fp16_t       in_data,
  input  logic [15:0] in_idx,
  input  logic        in_add,
  input  logic        in_last,
  output logic        out_valid,
  output fp16_t       out_data,
  output logic [15:0] out_idx,
  output logic        out_last,
  output logic        sq_valid,
  output fp16_t       sq_sum
);
  localparam int unsigned AW = $clog2(N);

  // x^2 / N, the two halves of the 1/N shift applied before squaring
  function automatic fp16_t msq(fp16_t x);
    return fp16_mul(fp16_scale2(x, -int'(AW / 2)), fp16_scale2(x, -int'(AW - AW / 2)));
  endfunction
  fp16_t h [N];
  fp16_t nv, acc;
  logic  first;

  assign nv = in_add ? fp16_add(h[in_idx[AW-1:0]], in_data) : in_data;

  always_ff @(posedge clk) begin
    if (in_valid) h[in_idx[AW-1:0]] <= nv;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0; out_last <= 1'b0;
      sq_valid <= 1'b0; sq_sum <= '0; acc <= '0; first <= 1'b1;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      sq_valid  <= 1'b0;
      if (in_valid) begin
        out_data <= nv;
        out_idx  <= in_idx;
        acc      <= first ? msq(nv) : fp16_add(acc, msq(nv));
        first    <= in_last;
        if (in_last) begin
          sq_valid <= 1'b1;
          sq_sum   <= first ? msq(nv) : fp16_add(acc, msq(nv));
        end
      end
    end
  end
endmodule
