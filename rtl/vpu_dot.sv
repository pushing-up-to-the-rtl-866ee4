// vpu_dot: the vector processing unit, a 128-lane FP16 dot engine.
//
// Structure (as in the original design): 128 FP16 multipliers, a binary adder
// tree of 7 levels summing the 128 products, one scaling multiplier that
// applies the group scale to the tree's sum, and an accumulator that adds the
// scaled sums of all groups of one row. One beat (128 weights and the matching
// 128-value slice of the operand vector) enters per cycle; when the beat
// marked `last` has gone through, the row's dot product leaves on `res`.
// For a 4096-wide row that is one result every 32 cycles, so the scalar units
// see one element at a time, which is what lets them work alongside.
//
// Second mode, for the value cache (mat == M_VC): the weighted sum
// o = sum_t p_t * v_t over the cached tokens. The beat holds the 128 values
// (q - z) of one token, the operand lane p_t (t = tok) is multiplied by the
// token's scale, the multipliers form p_t*s_t*(q_i - z), and 128 lane
// accumulators add these over the tokens; after the last token the 128-value
// head output leaves on `vec`. The original gives only the name "scaled DOT"
// for this step; the lane accumulators are this design's way of doing it with
// the same multipliers.
//
// Pipeline: operand read and multiply (1 cycle), 7 tree levels (1 cycle each),
// scale (1), accumulate (1): a result appears 10 cycles after its last beat
// enters. No backpressure: the engine accepts a beat every cycle.
// Rounding: every operation rounds to FP16 (see llm_pkg).
module vpu_dot
  import llm_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  vbeat_t in_meta,
  input  fp16_t  in_w [LANES],
  input  fp16_t  in_x [LANES],      // operand slice selected by in_meta.chunk
  output logic   res_valid,
  output fp16_t  res,
  output vbeat_t res_meta,
  output logic   vec_valid,
  output fp16_t  vec [LANES],
  output vbeat_t vec_meta
);
  localparam int unsigned LV = $clog2(LANES);
  localparam int unsigned NS = LV + 2;        // meta stages: mul, LV tree levels, scale

  fp16_t  tree [LV+1][LANES];
  logic   vld  [NS];
  vbeat_t meta [NS];
  logic   axpy_in;
  fp16_t  pfac;

  assign axpy_in = (in_meta.mat == M_VC);
  // scaled probability p_t * s_t for the value-cache mode
  assign pfac    = fp16_mul(in_x[in_meta.tok[$clog2(LANES)-1:0]], in_meta.scale);

  // stage 1: multipliers
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < LANES; i++)
        tree[0][i] <= fp16_mul(axpy_in ? pfac : in_x[i], in_w[i]);
    end
  end

  // tree levels
  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < (LANES >> l); i++)
        tree[l][i] <= fp16_add(tree[l-1][2*i], tree[l-1][2*i+1]);
    end
  end

  // meta pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) begin vld[s] <= 1'b0; meta[s] <= '0; end
    end else begin
      vld[0]  <= in_valid && !axpy_in;
      meta[0] <= in_meta;
      meta[0].q <= '0;
      for (int s = 1; s < NS; s++) begin
        vld[s]  <= vld[s-1];
        meta[s] <= meta[s-1];
      end
    end
  end

  // scale and accumulate
  fp16_t scaled;
  fp16_t acc;
  logic  acc_first;
  always_ff @(posedge clk) scaled <= fp16_mul(tree[LV][0], meta[NS-2].scale);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; acc_first <= 1'b1; res_valid <= 1'b0; res <= '0; res_meta <= '0;
    end else begin
      res_valid <= 1'b0;
      if (vld[NS-1]) begin
        acc       <= acc_first ? scaled : fp16_add(acc, scaled);
        acc_first <= meta[NS-1].last;
        if (meta[NS-1].last) begin
          res_valid <= 1'b1;
          res       <= acc_first ? scaled : fp16_add(acc, scaled);
          res_meta  <= meta[NS-1];
        end
      end
    end
  end

  // lane accumulators for the value cache
  logic   ax_vld;
  vbeat_t ax_meta;
  logic   lane_first;
  fp16_t  lane_acc [LANES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ax_vld <= 1'b0; ax_meta <= '0; lane_first <= 1'b1; vec_valid <= 1'b0; vec_meta <= '0;
    end else begin
      ax_vld    <= in_valid && axpy_in;
      ax_meta   <= in_meta;
      ax_meta.q <= '0;
      vec_valid <= 1'b0;
      if (ax_vld) begin
        lane_first <= ax_meta.last;
        if (ax_meta.last) begin
          vec_valid <= 1'b1;
          vec_meta  <= ax_meta;
        end
      end
    end
  end
  always_ff @(posedge clk) begin
    if (ax_vld)
      for (int i = 0; i < LANES; i++)
        lane_acc[i] <= lane_first ? tree[0][i] : fp16_add(lane_acc[i], tree[0][i]);
  end
  always_comb begin
    for (int i = 0; i < LANES; i++)
      vec[i] = lane_acc[i];
  end
endmodule
