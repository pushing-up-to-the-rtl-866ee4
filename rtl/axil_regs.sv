// axil_regs: the AXI-Lite control registers through which the host starts the
// decoding of one token.
//
// The host writes the token index (the id of the input token, which selects
// the embedding row), the position of the token in the sequence, and whether
// the token belongs to the prompt (prefill: the LM head is skipped, only the
// KV cache is filled). A write of 1 to CTRL starts the memory command
// generator. STATUS reads back busy in bit 0 and a count of finished tokens in
// bits 31:16.
//   0x00 CTRL        (write 1: start; reads 0)
//   0x04 TOKEN_INDEX (16 bits)
//   0x08 POSITION    (16 bits)
//   0x0C IS_PREFILL  (1 bit)
//   0x10 STATUS      (read only)
// The original names TokenIndex and isPrefill as the AXI-Lite inputs of the
// command generator; the register map and the separate position register are
// this design's choice.
//
// Interface: AXI4-Lite slave, 32-bit data, write address and data accepted
// together (one outstanding transaction each way), responses OKAY. `start` is
// a one-cycle pulse; the other outputs hold their register values.
module axil_regs (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        awvalid,
  output logic        awready,
  input  logic [7:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [7:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        start,
  output logic [15:0] token_index,
  output logic [15:0] position,
  output logic        is_prefill,
  input  logic        busy
);
  logic        busy_q;
  logic [15:0] done_cnt;
  logic        wr;

  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign arready = arvalid && !rvalid;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0; start <= 1'b0;
      token_index <= '0; position <= '0; is_prefill <= 1'b0;
      busy_q <= 1'b0; done_cnt <= '0;
    end else begin
      start  <= 1'b0;
      busy_q <= busy;
      if (busy_q && !busy) done_cnt <= done_cnt + 16'd1;
      if (wr) begin
        bvalid <= 1'b1;
        unique case (awaddr[4:2])
          3'd0: start       <= wdata[0] && !busy;
          3'd1: token_index <= wdata[15:0];
          3'd2: position    <= wdata[15:0];
          3'd3: is_prefill  <= wdata[0];
          default: ;
        endcase
      end else if (bvalid && bready) bvalid <= 1'b0;
      if (arready) begin
        rvalid <= 1'b1;
        unique case (araddr[4:2])
          3'd1: rdata <= {16'd0, token_index};
          3'd2: rdata <= {16'd0, position};
          3'd3: rdata <= {31'd0, is_prefill};
          3'd4: rdata <= {done_cnt, 15'd0, busy};
          default: rdata <= '0;
        endcase
      end else if (rvalid && rready) rvalid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
