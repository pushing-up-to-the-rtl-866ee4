// kv_to_mem: the write path of the KV cache ("KVToMem" with its S2MM command
// generator in the original design).
//
// Quantized key/value bytes arrive one per cycle with their index in the head
// vector (0..127). A serial-to-parallel register collects them into 64-byte
// words (dims 0..63, then 64..127), so that every write is a full 512-bit bus
// word. Completed scale-zero lines arrive from the two scale-zero FIFOs (keys
// and values). Each word is queued together with its address in the kvFIFO,
// which absorbs the latency of the memory write port.
//
// Cache layout (stream address space, see cmd_split), per cache (K or V):
//   base + entry * HEAD_BYTES + block * 2112 + { 0 for the scale-zero line |
//                                                64 + slot*128 + half*64 }
// with entry = layer*HEADS + head, block = token/16, slot = token mod 16 and
// HEAD_BYTES = (MAX_CTX/16) * 2112. A head's cache is one contiguous region
// read with one burst. The layout and base addresses are this design's
// choice; the original specifies only that the writes are bus-aligned.
//
// Interface: valid-only byte input with context (is_v, entry, token) held
// steady during a vector; valid-only line input; valid/ready word output
// (address, data). A byte word and a line completing in the same cycle are
// queued on consecutive cycles.
module kv_to_mem #(
  parameter int unsigned HEADS    = 32,
  parameter int unsigned MAX_CTX  = 1024,
  parameter int unsigned ENTRIES  = 1024,
  parameter logic [31:0] K_BASE   = 32'hE000_0000,
  parameter logic [31:0] V_BASE   = 32'hE840_0000,
  parameter int unsigned QDEPTH   = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         b_valid,
  input  logic [7:0]   b_data,
  input  logic [6:0]   b_idx,
  input  logic         ctx_is_v,
  input  logic [$clog2(ENTRIES)-1:0] ctx_entry,
  input  logic [15:0]  ctx_tok,
  input  logic         l_valid,
  input  logic         l_is_v,
  input  logic [511:0] l_line,
  input  logic [$clog2(ENTRIES)-1:0] l_entry,
  input  logic [15:0]  l_blk,
  output logic         w_valid,
  input  logic         w_ready,
  output logic [31:0]  w_addr,
  output logic [511:0] w_data,
  output logic         overflow
);
  localparam int unsigned BLK_BYTES  = 64 + 16 * 128;
  localparam int unsigned HEAD_BYTES = (MAX_CTX / 16) * BLK_BYTES;

  logic [511:0] sp;                 // serial-to-parallel register
  logic         word_done, hold_v;
  logic [31:0]  word_addr, line_addr;
  logic [543:0] hold;               // a line waiting for the queue
  logic         q_in_valid, q_in_ready;
  logic [543:0] q_in;

  function automatic logic [31:0] region(logic is_v, logic [$clog2(ENTRIES)-1:0] e, logic [15:0] blk);
    return (is_v ? V_BASE : K_BASE) + 32'(e) * 32'(HEAD_BYTES) + 32'(blk) * 32'(BLK_BYTES);
  endfunction

  assign word_done = b_valid && (b_idx[5:0] == 6'd63);
  assign word_addr = region(ctx_is_v, ctx_entry, ctx_tok >> 4) + 32'd64 + 32'(ctx_tok[3:0]) * 32'd128 + (b_idx[6] ? 32'd64 : 32'd0);
  assign line_addr = region(l_is_v, l_entry, l_blk);

  always_comb begin
    q_in_valid = 1'b0;
    q_in       = '0;
    if (word_done) begin
      q_in_valid = 1'b1;
      q_in       = {word_addr, b_data, sp[503:0]};
    end else if (hold_v) begin
      q_in_valid = 1'b1;
      q_in       = hold;
    end else if (l_valid) begin
      q_in_valid = 1'b1;
      q_in       = {line_addr, l_line};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0; hold_v <= 1'b0; hold <= '0; overflow <= 1'b0;
    end else begin
      if (b_valid) sp[8*b_idx[5:0] +: 8] <= b_data;
      if (hold_v && !word_done) hold_v <= 1'b0;
      if (l_valid && (word_done || hold_v)) begin
        hold_v <= 1'b1;
        hold   <= {line_addr, l_line};
      end
      if (q_in_valid && !q_in_ready) overflow <= 1'b1;
    end
  end

  logic [543:0] q_out;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  sync_fifo #(.WIDTH(544), .DEPTH(QDEPTH)) u_kvfifo (
    .clk, .rst_n,
    .in_valid(q_in_valid), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(q_out), .count(q_cnt)
  );
  assign w_addr = q_out[543:512];
  assign w_data = q_out[511:0];

  assert property (@(posedge clk) disable iff (!rst_n) q_in_valid |-> q_in_ready);
endmodule
