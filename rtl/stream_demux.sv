// stream_demux: splits the 512-bit memory stream by the layout of each command.
//
// Weight matrices (kind K_W4) are stored in the interleaved, bus-aligned
// format of the original design. The 128-value groups of the matrix, taken
// row by row, are packed in super-blocks of 133 beats:
//   [zero-point beat: 128 x 4-bit zero points]
//   then 4 times: [scale beat: 32 x FP16 scales] [32 weight beats]
// Each weight beat holds the 128 4-bit weights of one group; its zero point is
// nibble j of the zero-point beat and its scale is entry (j mod 32) of the
// scale beat before it, j being the group's place in the super-block. The
// demultiplexer keeps the two small side registers and forwards each weight
// beat with its own zero point and scale, so no whole-layer side table is
// needed on chip. Weight lane i is bits [4i +: 4]; zero point j is bits
// [4j +: 4]; scale j is bits [16j +: 16].
//
// The KV cache (K_KV8) of one (layer, head) is stored in blocks of
// [scale-zero line][16 tokens x 128 bytes]; each token takes two beats, the
// first carrying dims 0..63. Scale-zero pack j of a line (bits [32j +: 32])
// is {8'h00, zero[7:0], scale[15:0]}. A block that is not yet full has its
// line still on chip, so for a read that ends in such a block the line is
// taken from `cur_sz_line` and the (stale) line beat in the stream is
// dropped.
//
// Plain FP16 vectors (K_RAW: embedding rows, norm weights) are sent out one
// element per cycle on the raw port, 32 elements per beat, element e of a
// beat being bits [16e +: 16].
//
// Interface: a valid/ready command that describes the next stretch of the
// stream, the valid/ready stream, and two valid/ready outputs. No added
// latency: outputs are combinational from the stream head.
//
// What follows the original: the zero/scale/weight interleaving with 32
// groups per scale beat and 4 scale groups per zero-point beat, and the
// scale-zero pack fields. This design's choices: the order of fields inside a
// beat, the KV block layout and the per-element raw port. The text gives
// both 64 weights per beat and 128 weights per beat; 128 (a full 512-bit beat,
// matching the 128 multipliers and the 512b->2048b dequantizer) is used.
module stream_demux
  import llm_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // command describing the stream
  input  logic         cmd_valid,
  output logic         cmd_ready,
  input  cmd_t         cmd,
  // 512-bit stream
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [511:0] s_data,
  // scale-zero line of the (layer, head) being read, still on chip
  input  logic [511:0] cur_sz_line,
  // beats for the dequantizer
  output logic         vb_valid,
  input  logic         vb_ready,
  output vbeat_t       vb,
  // plain FP16 elements
  output logic         raw_valid,
  input  logic         raw_ready,
  output fp16_t        raw_data,
  output logic [15:0]  raw_idx,
  output mat_e         raw_mat,
  output logic         raw_last,
  output logic         busy
);
  localparam int unsigned SB_BEATS = 133;

  cmd_t         c;
  logic         act;
  // W4 state
  logic [7:0]   pos;           // beat position in the super-block
  logic [6:0]   gsb;           // group within the super-block (0..127)
  logic [31:0]  gflat;         // groups emitted so far
  logic [6:0]   gcol;          // group within the row
  logic [511:0] zp_reg, sc_reg;
  // KV8 state
  logic         kv_line;       // next beat is a block's scale-zero line
  logic [3:0]   kv_bt;         // token within block
  logic         kv_half;
  logic [10:0]  kv_tok;
  logic [511:0] sz_reg;
  // RAW state
  logic [4:0]   r_el;
  logic [15:0]  r_idx;

  logic [31:0]  groups_total;
  logic [6:0]   groups_row;
  logic         w_is_zp, w_is_sc;
  logic         fire_s;
  logic         done;

  assign groups_total = 32'(c.rows) * 32'(c.cols >> 7);
  assign groups_row   = 7'(c.cols >> 7);
  assign w_is_zp      = (pos == 8'd0);
  assign w_is_sc      = (pos != 8'd0) && (((pos - 8'd1) % 8'd33) == 8'd0);
  assign cmd_ready    = !act;
  assign busy         = act;

  // last block partial?  tokens in the final block < 16
  logic        kv_last_block;
  assign kv_last_block = (32'(kv_tok) >> 4) == ((32'(c.rows) - 1) >> 4);

  always_comb begin
    s_ready   = 1'b0;
    vb_valid  = 1'b0;
    raw_valid = 1'b0;
    vb        = '0;
    vb.kind   = c.kind;
    vb.mat    = c.mat;
    raw_data  = s_data[16*r_el +: 16];
    raw_idx   = r_idx;
    raw_mat   = c.mat;
    raw_last  = (r_idx == c.rows - 16'd1);
    done      = 1'b0;
    if (act) begin
      unique case (c.kind)
        K_W4: begin
          if (w_is_zp || w_is_sc) s_ready = 1'b1;
          else begin
            vb_valid = s_valid;
            s_ready  = vb_ready;
            vb.q     = s_data;
            vb.zp    = {4'd0, zp_reg[4*gsb +: 4]};
            vb.scale = sc_reg[16*gsb[4:0] +: 16];
            vb.chunk = gcol;
            vb.last  = (gcol == groups_row - 7'd1);
            done     = (gflat == groups_total - 32'd1);
          end
        end
        K_KV8: begin
          if (kv_line) s_ready = 1'b1;
          else begin
            vb_valid = s_valid;
            s_ready  = vb_ready;
            vb.q     = s_data;
            vb.zp    = sz_reg[32*kv_bt + 16 +: 8];
            vb.scale = sz_reg[32*kv_bt +: 16];
            vb.half  = kv_half;
            vb.tok   = kv_tok;
            // scores: every token is its own dot product with the query
            // (slice 0); weighted sum: token t weights with probability t
            vb.chunk = (c.mat == M_VC) ? 7'(kv_tok >> 7) : 7'd0;
            done     = kv_half && (kv_tok == 11'(c.rows - 16'd1));
            vb.last  = (c.mat == M_VC) ? done : kv_half;
          end
        end
        default: begin
          raw_valid = s_valid;
          s_ready   = raw_ready && ((r_el == 5'd31) || raw_last);
          done      = raw_last;
        end
      endcase
    end
  end

  assign fire_s = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; c <= '0;
      pos <= '0; gsb <= '0; gflat <= '0; gcol <= '0;
      zp_reg <= '0; sc_reg <= '0;
      kv_line <= 1'b1; kv_bt <= '0; kv_half <= 1'b0; kv_tok <= '0; sz_reg <= '0;
      r_el <= '0; r_idx <= '0;
    end else if (!act) begin
      if (cmd_valid) begin
        act <= 1'b1; c <= cmd;
        pos <= '0; gsb <= '0; gflat <= '0; gcol <= '0;
        kv_line <= 1'b1; kv_bt <= '0; kv_half <= 1'b0; kv_tok <= '0;
        r_el <= '0; r_idx <= '0;
      end
    end else begin
      unique case (c.kind)
        K_W4: if (fire_s) begin
          pos <= (pos == 8'(SB_BEATS - 1)) ? 8'd0 : pos + 8'd1;
          if (w_is_zp) zp_reg <= s_data;
          else if (w_is_sc) sc_reg <= s_data;
          else begin
            gsb   <= gsb + 7'd1;
            gflat <= gflat + 32'd1;
            gcol  <= (gcol == groups_row - 7'd1) ? 7'd0 : gcol + 7'd1;
          end
        end
        K_KV8: if (fire_s) begin
          if (kv_line) begin
            kv_line <= 1'b0;
            // the block holding the last token is not complete yet: use the
            // line that is still on chip
            sz_reg  <= (kv_last_block && (c.rows[3:0] != 4'd0)) ? cur_sz_line : s_data;
          end else begin
            kv_half <= ~kv_half;
            if (kv_half) begin
              kv_tok <= kv_tok + 11'd1;
              kv_bt  <= kv_bt + 4'd1;
              if (kv_bt == 4'd15) kv_line <= 1'b1;
            end
          end
        end
        default: if (raw_valid && raw_ready) begin
          r_el  <= r_el + 5'd1;
          r_idx <= r_idx + 16'd1;
        end
      endcase
      if (fire_s && done) act <= 1'b0;
      if (c.kind == K_RAW && raw_valid && raw_ready && raw_last) act <= 1'b0;
    end
  end
endmodule
