// tb_input_buffer: self-checking test of the Input buffer (8 banks x 16
// rows x 8 FP32 elements).
//
// A 1024-element vector is loaded one bank row per write, using beat k ->
// bank k % 8, row k / 8; every chunk read must then return elements
// 64*row .. 64*row+63 in order, one cycle after rd_en.  Chunk write-backs
// (wr_full) of half the rows follow, and are read back together with the
// untouched rows.  A read in the same cycle as a write to the same row must
// return the old data.
module tb_input_buffer;
  localparam int W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               wr_en = 1'b0, wr_full = 1'b0, rd_en = 1'b0;
  logic [2:0]         wr_bank = '0;
  logic [3:0]         wr_row = '0, rd_row = '0;
  logic [64*W-1:0]    wr_data = '0, rd_data;

  input_buffer dut (.*);

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

  task automatic read_row(int r);
    @(negedge clk);
    rd_en = 1'b1; rd_row = 4'(r);
    @(negedge clk);
    rd_en = 1'b0;
    for (int l = 0; l < 64; l++)
      check(rd_data[l*W +: W] == ref_mem[64*r + l], $sformatf("row %0d lane %0d", r, l));
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) ref_mem[i] = $urandom;
    for (int k = 0; k < 128; k++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_full = 1'b0; wr_bank = 3'(k % 8); wr_row = 4'(k / 8);
      wr_data = '0;
      for (int j = 0; j < 8; j++) wr_data[j*W +: W] = ref_mem[8*k + j];
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int r = 0; r < 16; r++) read_row(r);
    // read a row while overwriting it as a whole chunk
    @(negedge clk);
    rd_en = 1'b1; rd_row = 4'd3;
    wr_en = 1'b1; wr_full = 1'b1; wr_row = 4'd3;
    for (int l = 0; l < 64; l++) wr_data[l*W +: W] = ~ref_mem[64*3 + l];
    @(negedge clk);
    rd_en = 1'b0; wr_en = 1'b0;
    for (int l = 0; l < 64; l++) check(rd_data[l*W +: W] == ref_mem[64*3 + l], "read before write");
    for (int l = 0; l < 64; l++) ref_mem[64*3 + l] = ~ref_mem[64*3 + l];
    for (int r = 0; r < 16; r += 2) begin
      @(negedge clk);
      wr_en = 1'b1; wr_full = 1'b1; wr_row = 4'(r);
      for (int l = 0; l < 64; l++) begin
        ref_mem[64*r + l] = $urandom;
        wr_data[l*W +: W] = ref_mem[64*r + l];
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int r = 0; r < 16; r++) read_row(r);
    // rd_data holds while rd_en is low
    @(negedge clk);
    check(rd_data[0 +: W] == ref_mem[64*15], "read data held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
