// silu: the gated activation of the MLP, silu(g) * u.
//
// As the gate projection produces g_i (one element at a time), the unit
// computes silu(g_i) = g_i / (1 + e^(-g_i)) (the constant 1 is FP16 0x3C00, as
// printed in the original figure) and stores it in a FIFO. When the up
// projection later produces u_i, the matching silu(g_i) is taken from the FIFO
// and the product silu(g_i) * u_i is sent out: this is the input of the down
// projection. Division is done as a multiplication by the reciprocal.
//
// Interface: two valid-only inputs, gate and up; output valid-only with index.
// Timing: a product leaves one cycle after its up element. An up element that
// arrives with an empty FIFO is an error (flagged by an assertion); the gate
// projection always runs completely before the up projection.
module silu
  import llm_pkg::*;
#(
  parameter int unsigned N = 11008
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gate_valid,
  input  fp16_t       gate_data,
  input  logic        up_valid,
  input  fp16_t       up_data,
  output logic        out_valid,
  output fp16_t       out_data,
  output logic [15:0] out_idx
);
  fp16_t e_neg, den_r, act;
  fp16_exp   u_exp (.x(fp16_neg(gate_data)), .y(e_neg));
  fp16_recip u_rcp (.x(fp16_add(FP16_ONE, e_neg)), .y(den_r));
  assign act = fp16_mul(gate_data, den_r);

  logic  f_valid, f_ready;
  fp16_t f_data;
  logic [$clog2(N+1)-1:0] f_cnt;
  sync_fifo #(.WIDTH(16), .DEPTH(N)) u_fifo (
    .clk, .rst_n,
    .in_valid(gate_valid), .in_ready(f_ready), .in_data(act),
    .out_valid(f_valid), .out_ready(up_valid), .out_data(f_data), .count(f_cnt)
  );

  logic [15:0] ucnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0; ucnt <= '0;
    end else begin
      out_valid <= up_valid;
      if (up_valid) begin
        out_data <= fp16_mul(f_data, up_data);
        out_idx  <= ucnt;
        ucnt     <= (ucnt == 16'(N - 1)) ? 16'd0 : ucnt + 16'd1;
      end
    end
  end

  // up element must have its gate partner; gate FIFO must not overflow
  assert property (@(posedge clk) disable iff (!rst_n) up_valid |-> f_valid);
  assert property (@(posedge clk) disable iff (!rst_n) gate_valid |-> f_ready);
endmodule
