// operand_buffer: keeps the activation vectors that the dot engine multiplies
// with the weights streaming from memory, so that hidden states never leave
// the chip.
//
// Serial results of the scalar units (RMSNorm, RoPE, softmax, the SiLU-gated
// MLP output) are multiplexed onto the serial write port, each with its
// element index; a serial-to-parallel step places element i in lane i mod 128
// of 128-wide slice i / 128 of the selected bank. The head outputs of the
// value-cache step arrive as whole 128-wide slices on the vector write port.
// On the read side the dot engine asks for slice c of a bank for each beat;
// the same vector is read again for every row of the matrix.
// Bank use: 0 = normalized hidden state, 1 = rotated query of the head, then
// its softmax probabilities, 2 = concatenated head outputs, then MLP
// activations. Three banks of max(HIDDEN, FFN)/128 slices.
//
// Flow control (the original's "in" and "out" state machines): `inv` marks a
// bank empty when the command that will produce its next vector is issued;
// writing element or slice 0 of a bank starts a new vector and resets its fill
// count; slice c is available for reading once (c+1)*128 elements have been
// written or the vector was marked complete (`*_last`). `rd_avail` tells the
// stream side whether the slice a beat needs is there; if not, the beat
// waits (an operand stall).
//
// Interface: valid-only write ports, combinational read.
module operand_buffer
  import llm_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned NB    = 3,
  parameter int unsigned CH    = 86          // ceil(11008 / 128)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  input  logic [1:0]  s_bank,
  input  logic [15:0] s_idx,
  input  fp16_t       s_data,
  input  logic        s_last,
  input  logic        v_valid,
  input  logic [1:0]  v_bank,
  input  logic [6:0]  v_chunk,
  input  fp16_t       v_data [LANES],
  input  logic        v_last,
  input  logic        inv_valid,
  input  logic [1:0]  inv_bank,
  input  logic [1:0]  rd_bank,
  input  logic [6:0]  rd_chunk,
  output fp16_t       rd_data [LANES],
  input  logic [1:0]  chk_bank,
  input  logic [6:0]  chk_chunk,
  output logic        rd_avail
);
  localparam int unsigned LW = $clog2(LANES);

  fp16_t       mem [NB][CH][LANES];
  logic [15:0] fill [NB];
  logic        done [NB];

  always_ff @(posedge clk) begin
    if (s_valid) mem[s_bank][s_idx[LW +: 7]][s_idx[LW-1:0]] <= s_data;
    if (v_valid) mem[v_bank][v_chunk] <= v_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin fill[b] <= '0; done[b] <= 1'b0; end
    end else begin
      for (int b = 0; b < NB; b++) begin
        if (inv_valid && inv_bank == 2'(b)) begin
          fill[b] <= '0;
          done[b] <= 1'b0;
        end else if (s_valid && s_bank == 2'(b)) begin
          fill[b] <= (s_idx == 16'd0) ? 16'd1 : fill[b] + 16'd1;
          done[b] <= s_last;
        end else if (v_valid && v_bank == 2'(b)) begin
          fill[b] <= (v_chunk == 7'd0) ? 16'(LANES) : fill[b] + 16'(LANES);
          done[b] <= v_last;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) rd_data[i] = mem[rd_bank][rd_chunk][i];
    rd_avail = done[chk_bank] || (32'(fill[chk_bank]) >= (32'(chk_chunk) + 1) * LANES);
  end
endmodule
