// tb_axil_regs: writes and reads back the registers over AXI-Lite with random
// response back-pressure, checks that a CTRL write gives one start pulse (and
// none while busy), and that STATUS shows busy and counts finished tokens.
module tb_axil_regs;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [7:0] awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [1:0] bresp, rresp;
  logic start, is_prefill, busy;
  logic [15:0] token_index, position;
  int checks = 0, failures = 0, starts = 0;

  axil_regs dut (.*);

  always_ff @(posedge clk) if (rst_n && start) starts <= starts + 1;

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    do @(posedge clk); while (!awready);
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    bready = 1;
    do @(posedge clk); while (!bvalid);
    checks++; if (bresp != 2'b00) failures++;
    @(negedge clk); bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] want);
    checks++;
    if (got !== want) begin failures++; $display("%s: %h want %h", what, got, want); end
  endtask

  initial begin
    logic [31:0] d, t, p;
    awvalid = 0; wvalid = 0; awaddr = '0; wdata = '0; bready = 0; arvalid = 0; araddr = '0;
    rready = 0; busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      t = $urandom; p = $urandom;
      wr(8'h04, t); wr(8'h08, p); wr(8'h0C, 32'(i % 2));
      rd(8'h04, d); expect_eq("token index", d, {16'd0, t[15:0]});
      rd(8'h08, d); expect_eq("position", d, {16'd0, p[15:0]});
      rd(8'h0C, d); expect_eq("prefill", d, 32'(i % 2));
      expect_eq("outputs", {token_index, position}, {t[15:0], p[15:0]});
      expect_eq("prefill out", 32'(is_prefill), 32'(i % 2));
      // start, then a busy period
      wr(8'h00, 32'd1);
      expect_eq("one start", 32'(starts), 32'(i + 1));
      @(negedge clk); busy = 1;
      wr(8'h00, 32'd1);                    // ignored while busy
      expect_eq("no start while busy", 32'(starts), 32'(i + 1));
      rd(8'h10, d); expect_eq("status busy", d, {16'(i), 16'd1});
      @(negedge clk); busy = 0;
      repeat (2) @(negedge clk);
      rd(8'h10, d); expect_eq("status done", d, {16'(i + 1), 16'd0});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
