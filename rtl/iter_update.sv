// iter_update: the "Iteration update" unit (the paper's Fig. 2b).
//
// Holds the iterate a.  `load` selects a0 through the input multiplexer
// (update enable low); `step` performs one update
//   a <- omega*a + (delta*a)*(a*a)
// using four multipliers and one adder arranged as printed in Fig. 2b.
// A step takes three cycles after `step` (products; product of products;
// sum), each registered: `busy` is high for those three cycles and `a` holds
// the new value from the cycle after busy falls.  The register placement is this design's choice.
module iter_update #(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         step,
  input  logic [W-1:0] a0,
  input  logic [W-1:0] delta,
  input  logic [W-1:0] omega,
  output logic         busy,
  output logic [W-1:0] a
);
  logic [2:0]   st;
  logic [W-1:0] wa_c, da_c, aa_c, daaa_c, sum_c;
  logic [W-1:0] wa_q, da_q, aa_q, daaa_q;

  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_wa   (.a(omega), .b(a),    .y(wa_c));
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_da   (.a(delta), .b(a),    .y(da_c));
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_aa   (.a(a),     .b(a),    .y(aa_c));
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_daaa (.a(da_q),  .b(aa_q), .y(daaa_c));
  fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_sum  (.a(wa_q),  .b(daaa_q), .y(sum_c));

  assign busy = |st;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= '0;
      a  <= '0;
    end else begin
      st <= {st[1:0], step & ~busy};
      if (load) a <= a0;                 // update enable low: take a0
      else if (st[2]) a <= sum_c;        // update enable high: take the sum
    end
  end

  always_ff @(posedge clk) begin
    if (step && !busy) begin
      wa_q <= wa_c;
      da_q <= da_c;
      aa_q <= aa_c;
    end
    if (st[0]) daaa_q <= daaa_c;
  end
endmodule
