// cmd_split: splits one memory read command into one command per AXI port.
//
// The 512-bit stream is the concatenation of four 128-bit port streams, so a
// request for B bytes of stream becomes four requests of B/4 bytes. Memory is
// seen as four equal planes, one per port: lane k (bytes 16k..16k+15) of every
// 64-byte stream word lives in plane k. A stream address A therefore maps to
// byte address k*(4 GB/4) + A/4 on port k. With this mapping any command of
// whole 64-byte words, of any length, splits the same way, for reads and for
// the writes of the KV cache. The original design says only that commands are
// "split into four, one for each AXI port"; the plane mapping is this
// design's choice.
//
// Interface: valid/ready command in; a per-port valid/ready command out.
// The input is accepted once every port has taken its part (ports may take
// their parts in different cycles). A and B must be multiples of 64.
module cmd_split #(
  parameter int unsigned N_PORTS = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               s_valid,
  output logic               s_ready,
  input  logic [31:0]        s_addr,
  input  logic [22:0]        s_bytes,
  output logic [N_PORTS-1:0] m_valid,
  input  logic [N_PORTS-1:0] m_ready,
  output logic [N_PORTS-1:0][31:0] m_addr,
  output logic [N_PORTS-1:0][22:0] m_bytes
);
  localparam int unsigned SH = $clog2(N_PORTS);
  logic [N_PORTS-1:0] done;     // port already took its part of the current command
  logic [22:0]        part;

  assign part = s_bytes >> SH;

  always_comb begin
    for (int k = 0; k < N_PORTS; k++) begin
      m_valid[k] = s_valid && !done[k];
      m_addr[k]  = (s_addr >> SH) + 32'((64'(k) << 32) >> SH);
      m_bytes[k] = part;
    end
  end

  assign s_ready = s_valid && (&(done | m_ready));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= '0;
    else if (s_ready) done <= '0;
    else done <= done | (m_valid & m_ready);
  end
endmodule
