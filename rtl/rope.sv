// rope: rotary position embedding applied on the fly to the query or key of
// one head as the dot engine produces it, one element at a time.
//
// Three parts, as in the original design:
//  * rotator: caches the first half (elements 0..D/2-1) of the head vector;
//    when element j+D/2 arrives it forms the rotation pair (x_j, x_{j+D/2})
//    and emits  x_j*cos - x_{j+D/2}*sin  (index j) and then
//    x_{j+D/2}*cos + x_j*sin  (index j+D/2) on the next cycle;
//  * sin/cos generator: a ROM of 4096 FP16 samples of a quarter sine period,
//    sin(k*pi/8192), k = 0..4095; the full period is folded onto it by the
//    two quadrant bits, and cos(a) = sin(a + quarter period);
//  * address generator: a ROM of the 2048 inverse frequencies
//    10000^(-i/4096), i = 0,2,...,4094, multiplied by the token position to
//    give the angle. Pair j of a D-wide head uses entry j*4096/D, which is
//    theta_j = 10000^(-2j/D).
// The pairing (x_j, x_{j+D/2}) is the usual "rotate half" layout of LLaMA
// checkpoints, the original says only that the rotator caches half of the
// vector. The inverse frequencies are kept in turns per token in 32-bit fixed
// point (10000^(-i/4096) / 2pi * 2^32), so that position * frequency wraps
// modulo one turn for free; the top 14 bits of the product address the sine
// table. This representation is this design's choice.
//
// Interface: in_valid/in_ready with the element and its index in the head;
// `pos` is the token position and must be steady while a head streams in.
// Output is valid-only. in_ready is low for the one cycle in which the second
// element of a pair is emitted.
module rope
  import llm_pkg::*;
#(
  parameter int unsigned HEAD_DIM = 128,
  parameter int unsigned SIN_PTS  = 4096,   // quarter-period samples
  parameter int unsigned FREQ_PTS = 2048    // inverse-frequency entries
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_t       in_data,
  input  logic [6:0]  in_idx,
  input  logic [15:0] pos,
  output logic        out_valid,
  output fp16_t       out_data,
  output logic [6:0]  out_idx
);
  localparam int unsigned HALF = HEAD_DIM / 2;
  localparam int unsigned SW   = $clog2(SIN_PTS);     // 12
  localparam int unsigned FSTEP = 2 * FREQ_PTS / HEAD_DIM;

  fp16_t       sin_rom  [SIN_PTS];
  logic [31:0] freq_rom [FREQ_PTS];
  initial begin
    for (int k = 0; k < SIN_PTS; k++)
      sin_rom[k] = fp16_from_real($sin(real'(k) * 3.14159265358979 / (2.0 * SIN_PTS)));
    for (int i = 0; i < FREQ_PTS; i++)
      freq_rom[i] = 32'(longint'((10000.0 ** (-2.0 * real'(i) / (2.0 * FREQ_PTS))) / (2.0 * 3.14159265358979) * 4294967296.0));
  end

  // sine of a 14-bit angle (2 quadrant bits, 12 index bits)
  function automatic fp16_t sin_of(logic [SW+1:0] a);
    logic [SW-1:0] k;
    fp16_t         v;
    k = a[SW-1:0];
    if (a[SW] == 1'b0) v = sin_rom[k];
    else if (k == '0)   v = FP16_ONE;
    else                v = sin_rom[SIN_PTS - int'(k)];
    if (a[SW+1]) v = fp16_neg(v);
    return v;
  endfunction

  fp16_t       half_buf [HALF];
  logic [31:0] phase;
  logic [SW+1:0] ang;
  fp16_t       s, c, x1, x2;
  logic        second;              // second output of a pair pending
  fp16_t       pend;
  logic [6:0]  pend_idx;
  logic        pair_in;
  logic [$clog2(HALF)-1:0] j;

  assign j       = in_idx[$clog2(HALF)-1:0];
  assign pair_in = in_valid && in_ready && (32'(in_idx) >= HALF);
  assign phase   = 32'(pos) * freq_rom[32'(j) * FSTEP];
  assign ang     = phase[31 -: SW+2];
  assign s       = sin_of(ang);
  assign c       = sin_of(ang + (SW+2)'(SIN_PTS));
  assign x1      = half_buf[j];
  assign x2      = in_data;
  assign in_ready = !second;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && 32'(in_idx) < HALF) half_buf[j] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0;
      second <= 1'b0; pend <= '0; pend_idx <= '0;
    end else begin
      out_valid <= 1'b0;
      if (second) begin
        out_valid <= 1'b1; out_data <= pend; out_idx <= pend_idx;
        second    <= 1'b0;
      end else if (pair_in) begin
        out_valid <= 1'b1;
        out_data  <= fp16_sub(fp16_mul(x1, c), fp16_mul(x2, s));
        out_idx   <= 7'(j);
        pend      <= fp16_add(fp16_mul(x2, c), fp16_mul(x1, s));
        pend_idx  <= in_idx;
        second    <= 1'b1;
      end
    end
  end
endmodule
