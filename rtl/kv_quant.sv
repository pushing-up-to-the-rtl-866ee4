// kv_quant: on-chip 8-bit quantization of each newly generated key or value
// head vector (N = 128 elements), in two passes.
//
// Pass 1 (as elements arrive): store them and track x_max and x_min.
// Then:  s = (x_max - x_min) / 255  and  z = ceil(x_min / s)  (as given in the
// original). Pass 2: each element becomes q = round(x / s) - z, clamped to
// 0..255, and is sent out as a byte. The scale and zero point leave as one
// 32-bit scale-zero pack {8'h00, zp[7:0], s[15:0]} where zp = -z (clamped to
// 0..255), so that a cached value is recovered as (q - zp) * s.
// The original writes the second pass as "(x - z) * s", which is the
// recovery formula rather than the quantization; its figure shows a divide
// and a subtract on the way out, which is what is built here. Storing -z is
// this design's choice (z itself is negative whenever x_min < 0, and the pack
// has 8 bits for it). Divisions are multiplications by reciprocals.
//
// Interface: valid-only serial input with in_last; valid-only byte output with
// index; pack_valid pulses once per vector, with the last byte.
// Timing: pass 2 begins two cycles after in_last and emits one byte per cycle.
module kv_quant
  import llm_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_t       in_data,
  input  logic [6:0]  in_idx,
  input  logic        in_last,
  output logic        out_valid,
  output logic [7:0]  out_q,
  output logic [6:0]  out_idx,
  output logic        out_last,
  output logic        pack_valid,
  output logic [31:0] pack
);
  localparam fp16_t INV255 = 16'h1C04;   // 1/255 in FP16
  localparam int unsigned AW = $clog2(N);
  typedef enum logic [1:0] {S_IN, S_SZ, S_OUT} state_e;

  fp16_t  vbuf [N];
  state_e st;
  logic [AW-1:0] wp, rp;
  fp16_t  xmax, xmin, s, rs;
  logic [7:0] zp;
  fp16_t  s_next, rs_next;

  assign s_next = fp16_mul(fp16_sub(xmax, xmin), INV255);
  fp16_recip u_rcp (.x(s), .y(rs_next));
  assign in_ready = (st == S_IN);

  function automatic logic [7:0] clamp8(int v);
    if (v < 0) return 8'd0;
    if (v > 255) return 8'd255;
    return 8'(v);
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) vbuf[in_idx[AW-1:0]] <= in_data;
  end

  logic sz_step;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IN; wp <= '0; rp <= '0; xmax <= '0; xmin <= '0; s <= '0; rs <= '0; zp <= '0;
      sz_step <= 1'b0;
      out_valid <= 1'b0; out_q <= '0; out_idx <= '0; out_last <= 1'b0;
      pack_valid <= 1'b0; pack <= '0;
    end else begin
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      pack_valid <= 1'b0;
      unique case (st)
        S_IN: if (in_valid) begin
          xmax <= (wp == '0 || fp16_gt(in_data, xmax)) ? in_data : xmax;
          xmin <= (wp == '0 || fp16_gt(xmin, in_data)) ? in_data : xmin;
          wp   <= wp + 1'b1;
          if (in_last) begin st <= S_SZ; sz_step <= 1'b0; end
        end
        S_SZ: begin
          if (!sz_step) begin
            s <= s_next;
            sz_step <= 1'b1;
          end else begin
            // s is now registered; its reciprocal is available
            rs <= rs_next;
            zp <= clamp8(-fp16_to_int(fp16_mul(xmin, rs_next), 1'b1));
            rp <= '0;
            st <= S_OUT;
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_q     <= clamp8(fp16_to_int(fp16_mul(vbuf[rp], rs), 1'b0) + int'(zp));
          out_idx   <= 7'(rp);
          out_last  <= (rp == wp - 1'b1);
          if (rp == wp - 1'b1) begin
            pack_valid <= 1'b1;
            pack       <= {8'h00, zp, s};
            st         <= S_IN;
            wp         <= '0;
          end
          rp <= rp + 1'b1;
        end
        default: st <= S_IN;
      endcase
    end
  end
endmodule
