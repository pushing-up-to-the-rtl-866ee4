// data_sync: joins the four 128-bit AXI read streams into one 512-bit stream.
//
// Each port feeds its own FIFO, so a port whose burst arrives early is held
// while the others catch up. A 512-bit word leaves only when every FIFO holds
// a beat; port k supplies bits [128k +: 128]. This "synchronize and
// concatenate" step follows the original design; the per-port FIFO depth is
// this design's choice (the memory control unit is where the original keeps
// most of its block RAM for buffering AXI data).
//
// Interface: per-port valid/ready/data in, one valid/ready/data out. Timing:
// a beat written into the last FIFO can leave one cycle later; throughput is
// one 512-bit word per cycle when all ports keep up. `stall` is high in a
// cycle where some but not all ports hold data (a port lagging behind).
module data_sync #(
  parameter int unsigned N_PORTS = 4,
  parameter int unsigned PORT_W  = 128,
  parameter int unsigned DEPTH   = 512
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_PORTS-1:0]        s_valid,
  output logic [N_PORTS-1:0]        s_ready,
  input  logic [N_PORTS-1:0][PORT_W-1:0] s_data,
  output logic                      m_valid,
  input  logic                      m_ready,
  output logic [N_PORTS*PORT_W-1:0] m_data,
  output logic                      stall
);
  logic [N_PORTS-1:0] f_valid;

  for (genvar k = 0; k < N_PORTS; k++) begin : g_port
    logic [$clog2(DEPTH+1)-1:0] cnt;
    sync_fifo #(.WIDTH(PORT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (s_valid[k]), .in_ready (s_ready[k]), .in_data (s_data[k]),
      .out_valid(f_valid[k]), .out_ready(m_valid && m_ready),
      .out_data (m_data[k*PORT_W +: PORT_W]), .count(cnt)
    );
  end

  assign m_valid = &f_valid;
  assign stall   = (|f_valid) && !(&f_valid);
endmodule
