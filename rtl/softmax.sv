// softmax: numerically stable softmax over the attention scores of one head,
// in three passes, as in the original design.
//
// Pass 1 (as scores arrive): store each score in the buffer and keep the
// maximum m. Pass 2: read the buffer and add up d = sum exp(x_i - m).
// Pass 3: read the buffer again and send out exp(x_i - m) / d, computed as
// exp(x_i - m) * (1/d). Each pass handles one element per cycle. Subtracting
// m keeps every exponent at or below zero, so nothing overflows.
//
// Interface: in_valid/in_data/in_last, accepted while in_ready (pass 1 only).
// The number of scores is the number of elements up to in_last (at most
// MAX_LEN: the longest context plus the current token). Output valid-only with
// index. Timing: pass 2 begins the cycle after in_last and takes L cycles;
// pass 3 takes L more; the last probability leaves 2L+2 cycles after in_last.
// exp and 1/x are the table-based units fp16_exp and fp16_recip.
module softmax
  import llm_pkg::*;
#(
  parameter int unsigned MAX_LEN = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_t       in_data,
  input  logic        in_last,
  output logic        out_valid,
  output fp16_t       out_data,
  output logic [15:0] out_idx,
  output logic        out_last
);
  localparam int unsigned AW = $clog2(MAX_LEN);
  typedef enum logic [1:0] {S_IN, S_SUM, S_RCP, S_OUT} state_e;

  fp16_t  buf_q [MAX_LEN];
  state_e st;
  logic [AW:0] n, rp;
  fp16_t  m, d, rd;
  fp16_t  e_out, r_out, xr;

  assign xr = buf_q[rp[AW-1:0]];
  fp16_exp   u_exp (.x(fp16_sub(xr, m)), .y(e_out));
  fp16_recip u_rcp (.x(d), .y(r_out));

  assign in_ready = (st == S_IN);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buf_q[n[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IN; n <= '0; rp <= '0; m <= '0; d <= '0; rd <= '0;
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (st)
        S_IN: if (in_valid) begin
          m <= (n == '0 || fp16_gt(in_data, m)) ? in_data : m;
          n <= n + 1'b1;
          if (in_last) begin st <= S_SUM; rp <= '0; end
        end
        S_SUM: begin
          d  <= (rp == '0) ? e_out : fp16_add(d, e_out);
          rp <= rp + 1'b1;
          if (rp == n - 1'b1) st <= S_RCP;
        end
        S_RCP: begin
          rd <= r_out;
          rp <= '0;
          st <= S_OUT;
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_data  <= fp16_mul(e_out, rd);
          out_idx   <= 16'(rp);
          out_last  <= (rp == n - 1'b1);
          rp        <= rp + 1'b1;
          if (rp == n - 1'b1) begin st <= S_IN; n <= '0; end
        end
        default: st <= S_IN;
      endcase
    end
  end
endmodule
