// add_block: the macro's Add block, eight 8-input L1 adder trees and one
// 8-input L2 adder tree (LANES = 64).
//
// Accumulate mode (ADD_ACC): each L1 tree adds its eight lanes pairwise
// (4 + 2 + 1 adders), the L2 tree adds the eight L1 results the same way,
// and `sum` is the sum of the first `nlanes` lanes (the others count as
// zero).  Element-wise mode (ADD_EW): each lane's first-level adder adds
// a[i] + b[i]; this is the paper's mean-shift mode (b = -mean broadcast)
// and is reused to add beta.  Both results appear two cycles after
// in_valid: a register after the L1 stage and one after the L2 stage.  Tree
// shapes and modes follow the paper's Fig. 1c; the lane mask and the exact
// register placement are this design's choices.
module add_block
  import iterl2norm_pkg::*;
#(
  parameter int LANES = 64,
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1,
  localparam int NT   = LANES / 8,        // number of L1 trees
  localparam int NLW  = $clog2(LANES + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  add_mode_e          mode,
  input  logic [LANES*W-1:0] a,
  input  logic [LANES*W-1:0] b,
  input  logic [NLW-1:0]     nlanes,
  output logic               out_valid,
  output logic [W-1:0]       sum,
  output logic [LANES*W-1:0] ew
);
  // ---- L1 stage ---------------------------------------------------------
  logic [LANES*W-1:0]   am, bm;          // level-0 adder inputs
  logic [LANES*W-1:0]   lvl0;            // level-0 sums (EW results)
  logic [NT*W-1:0]      l1_sum;
  logic [NT*W-1:0]      l1_q;
  logic [LANES*W-1:0]   ew_q;
  logic                 v1, mode_q;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (mode == ADD_EW) begin
        am[i*W +: W] = a[i*W +: W];
        bm[i*W +: W] = b[i*W +: W];
      end else begin
        // Pair lanes (2k, 2k+1) on the first level, masked by nlanes.
        am[i*W +: W] = '0;
        bm[i*W +: W] = '0;
        if (i % 2 == 0) begin
          if (i < int'(nlanes))     am[i*W +: W] = a[i*W +: W];
          if (i + 1 < int'(nlanes)) bm[i*W +: W] = a[(i+1)*W +: W];
        end
      end
    end
  end

  for (genvar t = 0; t < NT; t++) begin : g_l1
    // Level 0: eight adders per tree; in EW mode all eight are used, in ACC
    // mode the even ones hold the pair sums (the odd ones add zeros).
    for (genvar k = 0; k < 8; k++) begin : g_lv0
      fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_a (
        .a(am[(8*t+k)*W +: W]), .b(bm[(8*t+k)*W +: W]), .y(lvl0[(8*t+k)*W +: W]));
    end
    logic [W-1:0] s1 [2];
    logic [W-1:0] s2;
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_b0 (
      .a(lvl0[(8*t+0)*W +: W]), .b(lvl0[(8*t+2)*W +: W]), .y(s1[0]));
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_b1 (
      .a(lvl0[(8*t+4)*W +: W]), .b(lvl0[(8*t+6)*W +: W]), .y(s1[1]));
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_c (
      .a(s1[0]), .b(s1[1]), .y(s2));
    assign l1_sum[t*W +: W] = s2;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    l1_q   <= l1_sum;
    ew_q   <= lvl0;
    mode_q <= mode;
  end

  // ---- L2 stage ---------------------------------------------------------
  logic [W-1:0] l2_in [8];
  logic [W-1:0] l2_a [4];
  logic [W-1:0] l2_b [2];
  logic [W-1:0] l2_s;

  always_comb begin
    for (int k = 0; k < 8; k++) l2_in[k] = (k < NT) ? l1_q[k*W +: W] : '0;
  end

  for (genvar k = 0; k < 4; k++) begin : g_l2a
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_a (.a(l2_in[2*k]), .b(l2_in[2*k+1]), .y(l2_a[k]));
  end
  for (genvar k = 0; k < 2; k++) begin : g_l2b
    fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_b (.a(l2_a[2*k]), .b(l2_a[2*k+1]), .y(l2_b[k]));
  end
  fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_l2c (.a(l2_b[0]), .b(l2_b[1]), .y(l2_s));

  always_ff @(posedge clk) begin
    sum <= (mode_q == ADD_ACC) ? l2_s : '0;
    ew  <= ew_q;
  end
endmodule
