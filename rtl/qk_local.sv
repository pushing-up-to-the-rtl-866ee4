// qk_local: the attention score of the current token with itself, formed
// while the key is produced.
//
// The current token's key is not read back from the cache: as the rotated
// query of a head comes out of RoPE it is stored here, and as the rotated key
// follows, element by element, q_i * k_i is added up. When all D key elements
// have arrived the score q.k leaves on score_valid; it is the last input of
// the head's softmax. The original states that "the product of the current
// query and the current key is computed after the RoPE" ("QK Local" in its
// pipeline figure); this module is this design's implementation of that step.
//
// Interface: two valid-only element inputs with index (q and k), one
// valid-only score output, one cycle after the last key element.
module qk_local
  import llm_pkg::*;
#(
  parameter int unsigned D = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       q_valid,
  input  fp16_t      q_data,
  input  logic [6:0] q_idx,
  input  logic       k_valid,
  input  fp16_t      k_data,
  input  logic [6:0] k_idx,
  output logic       score_valid,
  output fp16_t      score
);
  fp16_t qv [D];
  fp16_t acc;
  logic [$clog2(D+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (q_valid) qv[q_idx[$clog2(D)-1:0]] <= q_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; cnt <= '0; score_valid <= 1'b0; score <= '0;
    end else begin
      score_valid <= 1'b0;
      if (k_valid) begin
        acc <= (cnt == '0) ? fp16_mul(qv[k_idx[$clog2(D)-1:0]], k_data)
                           : fp16_add(acc, fp16_mul(qv[k_idx[$clog2(D)-1:0]], k_data));
        if (cnt == ($bits(cnt))'(D - 1)) begin
          cnt         <= '0;
          score_valid <= 1'b1;
          score       <= fp16_add(acc, fp16_mul(qv[k_idx[$clog2(D)-1:0]], k_data));
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
