// tb_partial_sum_buffer: self-checking test of the Partial sum buffer.
//
// Random writes to random entries must appear on the parallel output the
// cycle after the write, leave the other entries alone, and `clear` and
// reset must zero every entry.
module tb_partial_sum_buffer;
  localparam int W = 32, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               clear = 1'b0, wr_en = 1'b0;
  logic [3:0]         wr_idx = '0;
  logic [W-1:0]       wr_data = '0;
  logic [DEPTH*W-1:0] rd_data;

  partial_sum_buffer dut (.*);

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

  logic [W-1:0] ref_v [DEPTH];

  task automatic compare(string when);
    for (int i = 0; i < DEPTH; i++)
      check(rd_data[i*W +: W] == ref_v[i], $sformatf("%s entry %0d", when, i));
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) ref_v[i] = '0;
    @(negedge clk); @(negedge clk);
    compare("after reset");
    rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      clear = ($urandom % 50) == 0;
      wr_en = ($urandom % 2) == 0;
      wr_idx = 4'($urandom);
      wr_data = $urandom;
      @(posedge clk);
      if (clear) for (int i = 0; i < DEPTH; i++) ref_v[i] = '0;
      else if (wr_en) ref_v[wr_idx] = wr_data;
      @(negedge clk);
      wr_en = 1'b0; clear = 1'b0;
      compare("after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
