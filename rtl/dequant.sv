// dequant: turns quantized beats into 128 FP16 values for the dot engine.
//
// Weights (K_W4): the 128 4-bit weights q_i of a beat become the exact FP16
// integers (q_i - z), z being the group's zero point; the group's scale is
// passed on unchanged and applied once, after the adder tree, by the dot
// engine's scaling multiplier. So 512 bits in give 128 x 16 = 2048 bits out,
// as in the original design's "512b->2048b" dequantizer.
// KV cache (K_KV8): two beats of 64 bytes (dims 0..63, then 64..127) of one
// token are joined into 128 values (q_i - z) with that token's zero point.
//
// Interface: valid/ready beat in, valid-only vector out (the dot engine
// always accepts). Latency: one cycle. For KV8 only the second beat of a
// token produces an output; the first is held in a 512-bit register.
// Subtracting the zero point before the multipliers (and scaling after the
// tree) is this design's reading of the original block diagram, where zero points enter the
// dequantizer and the scales bypass it to the final multiplier.
module dequant
  import llm_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  vbeat_t in_beat,
  output logic   out_valid,
  output vbeat_t out_meta,             // q field unused downstream
  output fp16_t  out_w [LANES]
);
  logic [511:0] lo_half;
  fp16_t        w_next [LANES];

  assign in_ready = 1'b1;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (in_beat.kind == K_W4)
        w_next[i] = fp16_from_int(12'(signed'({1'b0, in_beat.q[4*i +: 4]})) - 12'(signed'({1'b0, in_beat.zp[3:0]})));
      else if (i < 64)
        w_next[i] = fp16_from_int(12'(signed'({1'b0, lo_half[8*i +: 8]})) - 12'(signed'({1'b0, in_beat.zp})));
      else
        w_next[i] = fp16_from_int(12'(signed'({1'b0, in_beat.q[8*(i-64) +: 8]})) - 12'(signed'({1'b0, in_beat.zp})));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_meta  <= '0;
      lo_half   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_beat.kind == K_KV8 && !in_beat.half) lo_half <= in_beat.q;
        else begin
          out_valid <= 1'b1;
          out_meta  <= in_beat;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !(in_beat.kind == K_KV8 && !in_beat.half)) out_w <= w_next;
  end
endmodule
