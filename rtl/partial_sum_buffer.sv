// partial_sum_buffer: holds the per-chunk sums of one reduction.
//
// DEPTH (16, enough for 1024/64 chunks) registers; one is written per
// cycle at wr_idx, clear zeroes them all, and all entries are visible in
// parallel on rd_data so the whole set can be handed to the Add block in a
// single cycle for the final sum.  Capacity follows the paper; the register
// file organisation and the clear input are this design's choices.
module partial_sum_buffer #(
  parameter int DEPTH = 16,
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1,
  localparam int IW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               wr_en,
  input  logic [IW-1:0]      wr_idx,
  input  logic [W-1:0]       wr_data,
  output logic [DEPTH*W-1:0] rd_data
);
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      rd_data <= '0;
    end else if (wr_en) begin
      rd_data[wr_idx*W +: W] <= wr_data;
    end
  end
endmodule
