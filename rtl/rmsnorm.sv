// rmsnorm: RMS normalization of an N-element hidden vector, in two passes.
//
// Pass 1 (as elements arrive): each element is stored in the vector buffer
// and x^2/N is added to a running mean square. The original notes that this pass
// can be skipped when the square sum was already formed elsewhere; here the
// residual unit forms it while the projection output is generated, and
// `bypass` makes the unit take `sq_sum` instead of its own sum.
// Between passes: r = 1/sqrt(mean square), a table lookup. N is a power of
// two, so the 1/N of each term is an exact exponent shift.
// Pass 2: each stored element is multiplied by r and by its learned weight
// (lnScale in the original figure), one per cycle, and sent out with its index.
// The norm weights are written beforehand through the `lnw_*` port (they come
// from memory as a plain FP16 vector).
//
// Interface: in_valid with in_data/in_last (serial, index implied by order);
// accepted only while in_ready (not during pass 2). Output valid-only, with
// index. Timing: pass 2 starts two cycles after the last element (one cycle to
// take the sum, one for the square root) and lasts N cycles.
// The accumulator is FP16 like the rest of the datapath; accumulating the
// mean square instead of the plain sum keeps it finite up to an RMS of 256
// (the plain sum would overflow at an RMS of 4 for N = 4096); a wider
// accumulator would depart from the original's all-FP16 datapath.
module rmsnorm
  import llm_pkg::*;
#(
  parameter int unsigned N = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bypass,
  input  logic        sq_valid,
  input  fp16_t       sq_sum,
  input  logic        in_valid,
  output logic        in_ready,
  input  fp16_t       in_data,
  input  logic        in_last,
  input  logic        lnw_we,
  input  logic [$clog2(N)-1:0] lnw_addr,
  input  fp16_t       lnw_data,
  output logic        out_valid,
  output fp16_t       out_data,
  output logic [15:0] out_idx
);
  localparam int unsigned AW = $clog2(N);
  typedef enum logic [1:0] {S_IN, S_RMS, S_OUT} state_e;

  fp16_t  vbuf [N];
  fp16_t  lnw  [N];
  state_e st;
  logic [AW-1:0] wp, rp;
  fp16_t  acc, byp, r;

  // x^2 / N, the two halves of the 1/N shift applied before squaring
  function automatic fp16_t msq(fp16_t x);
    return fp16_mul(fp16_scale2(x, -int'(AW / 2)), fp16_scale2(x, -int'(AW - AW / 2)));
  endfunction
  logic   byp_ok;
  fp16_t  rs_out;

  fp16_rsqrt u_rsqrt (.x(bypass ? byp : acc), .y(rs_out));

  assign in_ready = (st == S_IN);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) vbuf[wp] <= in_data;
    if (lnw_we) lnw[lnw_addr] <= lnw_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IN; wp <= '0; rp <= '0; acc <= '0; byp <= '0; byp_ok <= 1'b0; r <= '0;
      out_valid <= 1'b0; out_data <= '0; out_idx <= '0;
    end else begin
      out_valid <= 1'b0;
      if (sq_valid) begin byp <= sq_sum; byp_ok <= 1'b1; end
      unique case (st)
        S_IN: if (in_valid) begin
          acc <= (wp == '0) ? msq(in_data) : fp16_add(acc, msq(in_data));
          wp  <= wp + 1'b1;
          if (in_last) st <= S_RMS;
        end
        S_RMS: if (!bypass || byp_ok || sq_valid) begin
          if (!bypass || byp_ok) begin
            r  <= rs_out;
            rp <= '0;
            st <= S_OUT;
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_data  <= fp16_mul(fp16_mul(vbuf[rp], r), lnw[rp]);
          out_idx   <= 16'(rp);
          rp        <= rp + 1'b1;
          if (rp == wp - 1'b1) begin
            st <= S_IN; wp <= '0; byp_ok <= 1'b0;
          end
        end
        default: st <= S_IN;
      endcase
    end
  end
endmodule
