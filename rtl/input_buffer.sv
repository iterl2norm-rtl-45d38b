// input_buffer: the macro's Input buffer, NB banks of HB rows x WB elements.
//
// Element j of a stored vector lives in bank (j / WB) % NB, row j / (NB*WB),
// lane j % WB (the paper's Fig. 1b layout: bank b, row i holds
// x[WB*(b+NB*i) .. WB*(b+NB*i+1)-1]).  All banks share one read pointer, so a
// read returns a whole chunk of NB*WB elements, one cycle after rd_en.
// There is one write port: a bank-row write (wr_full=0) stores WB elements
// into bank wr_bank while the vector is loaded, and a chunk write
// (wr_full=1) stores all NB*WB elements of row wr_row when the mean-shifted
// vector is written back.  Reads and writes may happen in the same cycle;
// a read of the row being written returns the old contents.  The geometry
// is the paper's; port shapes and the one-cycle read latency are this
// design's choices.
module input_buffer #(
  parameter int NB    = 8,
  parameter int HB    = 16,
  parameter int WB    = 8,
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1,
  localparam int RW   = $clog2(HB),
  localparam int BW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic                 wr_full,
  input  logic [BW-1:0]        wr_bank,
  input  logic [RW-1:0]        wr_row,
  input  logic [NB*WB*W-1:0]   wr_data,
  input  logic                 rd_en,
  input  logic [RW-1:0]        rd_row,
  output logic [NB*WB*W-1:0]   rd_data
);
  // One memory per bank so each bank has its own write enable.
  logic [WB*W-1:0] mem [NB][HB];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < NB; b++) begin
        if (wr_full) mem[b][wr_row] <= wr_data[b*WB*W +: WB*W];
        else if (wr_bank == BW'(b)) mem[b][wr_row] <= wr_data[0 +: WB*W];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int b = 0; b < NB; b++) rd_data[b*WB*W +: WB*W] <= mem[b][rd_row];
    end
  end

endmodule
