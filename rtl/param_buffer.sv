// param_buffer: gamma or beta buffer of the macro.
//
// Same organisation as the Input buffer (NB banks of HB rows x WB elements,
// shared read pointer, one chunk of NB*WB elements read per cycle with one
// cycle of latency) but written only while loading, one bank row of WB
// elements per write.  The paper gives the capacity (1024 elements per
// buffer); the bank organisation is assumed to match the Input buffer.
module param_buffer #(
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
  input  logic [BW-1:0]        wr_bank,
  input  logic [RW-1:0]        wr_row,
  input  logic [WB*W-1:0]      wr_data,
  input  logic                 rd_en,
  input  logic [RW-1:0]        rd_row,
  output logic [NB*WB*W-1:0]   rd_data
);
  logic [WB*W-1:0] mem [NB][HB];

  always_ff @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      if (wr_en && wr_bank == BW'(b)) mem[b][wr_row] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int b = 0; b < NB; b++) rd_data[b*WB*W +: WB*W] <= mem[b][rd_row];
    end
  end

endmodule
