// tb_operand_buffer: fills banks through the serial port in a scrambled order
// and through the vector port, and checks the data read back and the
// availability flag of every slice as the fill progresses: a slice is
// available once (c+1)*128 elements have been written or the vector is marked
// complete, and not after the bank has been invalidated.
module tb_operand_buffer;
  import llm_pkg::*;
  localparam int LN = 128, NB = 3, CH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_last, v_valid, v_last, inv_valid, rd_avail;
  logic [1:0] s_bank, v_bank, inv_bank, rd_bank, chk_bank;
  logic [15:0] s_idx;
  fp16_t s_data;
  logic [6:0] v_chunk, rd_chunk, chk_chunk;
  fp16_t v_data [LN];
  fp16_t rd_data [LN];
  int checks = 0, failures = 0;
  fp16_t model [NB][CH * LN];

  operand_buffer #(.LANES(LN), .NB(NB), .CH(CH)) dut (.*);

  task automatic check_avail(int b, int written, bit complete);
    for (int c = 0; c < CH; c++) begin
      chk_bank = 2'(b); chk_chunk = 7'(c);
      #1;
      checks++;
      if (rd_avail != (complete || written >= (c + 1) * LN)) begin
        failures++; $display("bank %0d slice %0d avail %0d after %0d", b, c, rd_avail, written);
      end
    end
  endtask

  task automatic check_data(int b, int nch);
    for (int c = 0; c < nch; c++) begin
      rd_bank = 2'(b); rd_chunk = 7'(c);
      #1;
      for (int i = 0; i < LN; i++) begin
        checks++;
        if (rd_data[i] != model[b][c * LN + i]) begin
          failures++;
          if (failures < 10) $display("bank %0d elem %0d: %h want %h", b, c * LN + i, rd_data[i], model[b][c * LN + i]);
        end
      end
    end
  endtask

  initial begin
    int n, idx;
    s_valid = 0; s_last = 0; v_valid = 0; v_last = 0; inv_valid = 0; s_bank = 0; v_bank = 0;
    inv_bank = 0; rd_bank = 0; chk_bank = 0; s_idx = 0; s_data = 0; v_chunk = 0; rd_chunk = 0; chk_chunk = 0;
    for (int i = 0; i < LN; i++) v_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) check_avail(b, 0, 0);
    // serial fill of bank 0 with element 0 first, then pairs (j, j+64) per slice
    for (int rep = 0; rep < 2; rep++) begin
      n = 3 * LN + 40;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        if (k < (n / LN) * LN) idx = (k / LN) * LN + ((k % 2 == 0) ? (k % LN) / 2 : LN / 2 + (k % LN) / 2);
        else idx = k;
        s_valid = 1; s_bank = 2'd0; s_idx = 16'(idx); s_data = 16'($urandom);
        s_last = (k == n - 1) && rep == 1;
        model[0][idx] = s_data;
        @(posedge clk); #1;
        s_valid = 0;
        if (k % 37 == 0 || k == n - 1) check_avail(0, k + 1, s_last);
      end
      check_data(0, 3);
    end
    // invalidate: nothing available, then refill starts over
    @(negedge clk); inv_valid = 1; inv_bank = 2'd0;
    @(negedge clk); inv_valid = 0;
    check_avail(0, 0, 0);
    // vector writes into bank 2, slice by slice
    for (int c = 0; c < CH; c++) begin
      @(negedge clk);
      v_valid = 1; v_bank = 2'd2; v_chunk = 7'(c); v_last = (c == CH - 1);
      for (int i = 0; i < LN; i++) begin v_data[i] = 16'($urandom); model[2][c * LN + i] = v_data[i]; end
      @(posedge clk); #1;
      v_valid = 0;
      check_avail(2, (c + 1) * LN, c == CH - 1);
      check_avail(1, 0, 0);
    end
    check_data(2, CH);
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
