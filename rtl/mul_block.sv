// mul_block: the macro's Mul block, LANES floating-point multipliers.
//
// p[i] = a[i] * b[i] for every lane, with a latency of two clock cycles
// (the paper gives the two-cycle latency and the 64 multipliers; the split
// into a product register and an output register is this design's).  A new
// operand set can be accepted every cycle; out_valid follows in_valid two
// cycles later.
module mul_block #(
  parameter int LANES = 64,
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [LANES*W-1:0] a,
  input  logic [LANES*W-1:0] b,
  output logic               out_valid,
  output logic [LANES*W-1:0] p
);
  logic [LANES*W-1:0] prod, prod_q;
  logic               v_q;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_mul (
      .a(a[i*W +: W]), .b(b[i*W +: W]), .y(prod[i*W +: W]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

  always_ff @(posedge clk) begin
    prod_q <= prod;
    p      <= prod_q;
  end
endmodule
