// tb_buffer_controller: self-checking test of the buffer controller.
//
// Random load beats and write-back requests are applied; load beat k must
// address bank k % 8, row k / 8 (Input, gamma and beta buffers alike), a
// bank-row write must carry the 8 beat elements in the lowest lanes, and a
// write-back must take the Input buffer port as a whole-chunk write of its
// row and data.
module tb_buffer_controller;
  localparam int W = 32;
  logic            x_wr = 0, g_wr = 0, b_wr = 0, wb_en = 0;
  logic [7:0]      x_beat = '0, g_beat = '0, b_beat = '0;
  logic [8*W-1:0]  x_data = '0;
  logic [3:0]      wb_row = '0;
  logic [64*W-1:0] wb_data = '0, ib_wr_data;
  logic            ib_wr_en, ib_wr_full, g_we, b_we;
  logic [2:0]      ib_wr_bank, g_bank, b_bank;
  logic [3:0]      ib_wr_row, g_row, b_row;

  buffer_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      x_wr = 1'($urandom); g_wr = 1'($urandom); b_wr = 1'($urandom);
      wb_en = ($urandom % 4) == 0;
      x_beat = 8'($urandom % 128); g_beat = 8'($urandom % 128); b_beat = 8'($urandom % 128);
      wb_row = 4'($urandom);
      for (int i = 0; i < 8; i++) x_data[i*W +: W] = $urandom;
      for (int i = 0; i < 64; i++) wb_data[i*W +: W] = $urandom;
      #1;
      check(g_we == g_wr && int'(g_bank) == g_beat % 8 && int'(g_row) == g_beat / 8, "gamma address");
      check(b_we == b_wr && int'(b_bank) == b_beat % 8 && int'(b_row) == b_beat / 8, "beta address");
      if (wb_en) begin
        check(ib_wr_en && ib_wr_full && ib_wr_row == wb_row && ib_wr_data == wb_data, "write-back");
      end else begin
        check(ib_wr_en == x_wr && !ib_wr_full, "load write enable");
        check(int'(ib_wr_bank) == x_beat % 8 && int'(ib_wr_row) == x_beat / 8, "load address");
        check(ib_wr_data[8*W-1:0] == x_data, "load data");
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
