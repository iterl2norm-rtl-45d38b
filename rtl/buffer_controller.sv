// buffer_controller: address decoding and write arbitration for the buffers.
//
// A load beat numbered k (WB elements) goes to bank k % NB, row k / NB of
// its buffer, which reproduces the paper's layout (element j in bank
// (j/WB) % NB, row j/(NB*WB)).  The Input buffer's single write port is
// shared between loading (bank-row writes from channel 1) and the Shift
// controller's write-back of a whole mean-shifted chunk; the write-back
// wins, which never matters in practice because the main controller does
// not compute while loading.  Purely combinational.  The paper only names
// this block; its function here is this design's choice.
// The gamma and beta bank and row outputs are plain bit fields of the beat
// number (bank = low bits, row = high bits), so they are wires, not logic.
module buffer_controller #(
  parameter int NB    = 8,
  parameter int HB    = 16,
  parameter int WB    = 8,
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1,
  localparam int RW   = $clog2(HB),
  localparam int BW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int KW   = $clog2(NB * HB) + 1
) (
  // load beats
  input  logic               x_wr,
  input  logic [KW-1:0]      x_beat,
  input  logic [WB*W-1:0]    x_data,
  input  logic               g_wr,
  input  logic [KW-1:0]      g_beat,
  input  logic               b_wr,
  input  logic [KW-1:0]      b_beat,
  // write-back of a mean-shifted chunk
  input  logic               wb_en,
  input  logic [RW-1:0]      wb_row,
  input  logic [NB*WB*W-1:0] wb_data,
  // Input buffer write port
  output logic               ib_wr_en,
  output logic               ib_wr_full,
  output logic [BW-1:0]      ib_wr_bank,
  output logic [RW-1:0]      ib_wr_row,
  output logic [NB*WB*W-1:0] ib_wr_data,
  // gamma / beta buffer write ports
  output logic               g_we,
  output logic [BW-1:0]      g_bank,
  output logic [RW-1:0]      g_row,
  output logic               b_we,
  output logic [BW-1:0]      b_bank,
  output logic [RW-1:0]      b_row
);
  always_comb begin
    g_we   = g_wr;
    b_we   = b_wr;
    g_bank = BW'(g_beat % KW'(NB));
    g_row  = RW'(g_beat / KW'(NB));
    b_bank = BW'(b_beat % KW'(NB));
    b_row  = RW'(b_beat / KW'(NB));
    if (wb_en) begin
      ib_wr_en   = 1'b1;
      ib_wr_full = 1'b1;
      ib_wr_bank = '0;
      ib_wr_row  = wb_row;
      ib_wr_data = wb_data;
    end else begin
      ib_wr_en   = x_wr;
      ib_wr_full = 1'b0;
      ib_wr_bank = BW'(x_beat % KW'(NB));
      ib_wr_row  = RW'(x_beat / KW'(NB));
      ib_wr_data = {{((NB-1)*WB*W){1'b0}}, x_data};
    end
  end
endmodule
