// kv_sz_fifo: gathers the 32-bit scale-zero packs of the KV cache into
// bus-wide 512-bit lines so that they reach memory in full-width writes.
//
// The cache is quantized per (layer, head) and per token, so each token adds
// one pack for every (layer, head): LAYERS x HEADS packs, always in the same
// order. The FIFO holds one 512-bit element per (layer, head). For each new
// pack the element at the head is popped, the pack is written into slot
// (token mod 16), and the element is pushed back at the tail; after a full
// round every element has moved one slot on. When slot 15 is filled (the 16th
// token of a block) the completed line is sent out to be written to memory,
// and the element restarts empty. This is the original design's scheme; since
// pop and push always address the same element, the FIFO is built as one
// memory with a rotating pointer, which is this design's choice.
//
// `head_line` is the element now at the head (the packs of the earlier tokens
// of the current block; later slots zero): the demultiplexer uses it when a
// cache read ends inside a block that has not been written to memory yet.
//
// Interface: valid-only pack input; valid-only line output (with the element
// number, layer*HEADS + head, and the block number token/16), one cycle after
// the pack. `clear` starts a new sequence at token 0.
module kv_sz_fifo #(
  parameter int unsigned DEPTH = 1024,       // LAYERS x HEADS
  parameter int unsigned SLOTS = 16          // 512 / 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         pack_valid,
  input  logic [31:0]  pack,
  output logic [32*SLOTS-1:0] head_line,
  output logic         line_valid,
  output logic [32*SLOTS-1:0] line,
  output logic [$clog2(DEPTH)-1:0] line_entry,
  output logic [15:0]  line_blk
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned SW = $clog2(SLOTS);

  logic [32*SLOTS-1:0] mem [DEPTH];
  logic [AW-1:0]  p;
  logic [15:0]    tok;
  logic [SW-1:0]  slot;
  logic [32*SLOTS-1:0] cur, upd;

  assign slot = tok[SW-1:0];
  assign cur  = (slot == '0) ? '0 : mem[p];
  always_comb begin
    upd = cur;
    upd[32*slot +: 32] = pack;
  end
  assign head_line = cur;

  always_ff @(posedge clk) begin
    if (pack_valid) mem[p] <= (slot == SW'(SLOTS - 1)) ? '0 : upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p <= '0; tok <= '0; line_valid <= 1'b0; line <= '0; line_entry <= '0; line_blk <= '0;
    end else begin
      line_valid <= 1'b0;
      if (clear) begin
        p <= '0; tok <= '0;
      end else if (pack_valid) begin
        if (slot == SW'(SLOTS - 1)) begin
          line_valid <= 1'b1;
          line       <= upd;
          line_entry <= p;
          line_blk   <= tok >> SW;
        end
        if (p == AW'(DEPTH - 1)) begin
          p   <= '0;
          tok <= tok + 16'd1;
        end else p <= p + 1'b1;
      end
    end
  end
endmodule
