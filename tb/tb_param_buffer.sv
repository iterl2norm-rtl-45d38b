// tb_param_buffer: self-checking test of the gamma/beta buffer.
//
// 1024 random elements are written one bank row per beat (beat k -> bank
// k % 8, row k / 8) in a shuffled order; each chunk read must return
// elements 64*row .. 64*row+63, one cycle after rd_en.
module tb_param_buffer;
  localparam int W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic            wr_en = 1'b0, rd_en = 1'b0;
  logic [2:0]      wr_bank = '0;
  logic [3:0]      wr_row = '0, rd_row = '0;
  logic [8*W-1:0]  wr_data = '0;
  logic [64*W-1:0] rd_data;

  param_buffer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] ref_mem [1024];
  int order [128];

  initial begin
    int j, t, k;
    for (int i = 0; i < 1024; i++) ref_mem[i] = $urandom;
    for (int k = 0; k < 128; k++) order[k] = k;
    for (int k = 127; k > 0; k--) begin
      j = int'($urandom % 32'(k + 1));
      t = order[k]; order[k] = order[j]; order[j] = t;
    end
    for (int i = 0; i < 128; i++) begin
      k = order[i];
      @(negedge clk);
      wr_en = 1'b1; wr_bank = 3'(k % 8); wr_row = 4'(k / 8);
      for (int j = 0; j < 8; j++) wr_data[j*W +: W] = ref_mem[8*k + j];
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int r = 15; r >= 0; r--) begin
      @(negedge clk);
      rd_en = 1'b1; rd_row = 4'(r);
      @(negedge clk);
      rd_en = 1'b0;
      for (int l = 0; l < 64; l++)
        check(rd_data[l*W +: W] == ref_mem[64*r + l], $sformatf("row %0d lane %0d", r, l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
