// iterl2norm_top: the IterL2Norm layer-normalisation macro.
//
// Computes, for each of N stored d-long vectors x (d <= NB*HB*WB = 1024),
//   y = x - mean(x),  m = ||y||^2,  a ~= 1/sqrt(m) by n_iter steps of
//   a <- a + lambda*m*a*(1 - m*a^2),  z = gamma * (d^1/2 * a * y) + beta,
// without a divider or a square root.  Blocks, as in the paper's Fig. 1a:
// Input, gamma and beta buffers (8 banks x 16 rows x 8 elements each), a
// Partial sum buffer, one Add block (eight 8-input L1 trees and an 8-input
// L2 tree) and one Mul block (64 multipliers) shared by all phases, the
// iteration unit (Fig. 2), and the input, buffer, mean, shift, m, output
// and main controllers.  The active phase controller's request (dp_req_t)
// selects the operands of the shared blocks.
//
// Interface: configure with cfg_valid (d, d^-1, d^1/2, N, n_iter); then
// stream x (N*C*8 beats), gamma and beta (C*8 beats each, C = ceil(d/64))
// over three valid/ready channels of 8 elements per beat.  Results leave as
// 64-element chunks on z_valid/z_data with the vector and chunk numbers and
// the number of valid lanes; `done` rises after the last chunk of the last
// vector.  The last z of a vector comes 5C + 4*n_iter + 41 cycles after the
// last x beat for the first vector and 5C + 4*n_iter + 40 cycles after the
// previous vector's last z for the others (66 cycles at d = 64 and 141 at
// d = 1024 with five steps); loading is not included.
//
// The phase sequence, buffer geometry, block composition and the two-cycle
// Add/Mul latency follow the paper; the channel protocol, the schedules and
// the number-format details are this design's choices.
module iterl2norm_top
  import iterl2norm_pkg::*;
#(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  parameter int NB    = 8,
  parameter int HB    = 16,
  parameter int WB    = 8,
  localparam int W     = EXP_W + MAN_W + 1,
  localparam int LANES = NB * WB,
  localparam int RW    = $clog2(HB),
  localparam int BW    = (NB > 1) ? $clog2(NB) : 1,
  localparam int KW    = $clog2(NB * HB) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // channel 1: configuration
  input  logic               cfg_valid,
  input  logic [10:0]        cfg_d,
  input  logic [W-1:0]       cfg_d_inv,
  input  logic [W-1:0]       cfg_d_sqrt,
  input  logic [4:0]         cfg_nvec,
  input  logic [3:0]         cfg_n_iter,
  // channel 1: x, channel 2: gamma, channel 3: beta
  input  logic               x_valid,
  output logic               x_ready,
  input  logic [WB*W-1:0]    x_data,
  input  logic               g_valid,
  output logic               g_ready,
  input  logic [WB*W-1:0]    g_data,
  input  logic               b_valid,
  output logic               b_ready,
  input  logic [WB*W-1:0]    b_data,
  // output z
  output logic               z_valid,
  output logic [LANES*W-1:0] z_data,
  output logic [4:0]         z_vec,
  output logic [3:0]         z_chunk,
  output logic [6:0]         z_nlanes,
  output logic               busy,
  output logic               done,
  // intermediate results of the vector in progress, for observation
  output logic [W-1:0]       mean,
  output logic [W-1:0]       m,
  output logic [W-1:0]       a_inf
);
  // ---------------- configuration and loading ----------------------------
  logic [10:0]   d;
  logic [W-1:0]  d_inv, d_sqrt, scale;
  logic [4:0]    nvec, nchunks, vec;
  logic [3:0]    n_iter, base;
  logic          load_en, load_done;
  logic          x_wr, g_wr, b_wr;
  logic [KW-1:0] x_beat, g_beat, b_beat;
  phase_e        phase;

  input_controller #(.NB(NB), .HB(HB), .WB(WB), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_inctl (
    .clk, .rst_n, .cfg_valid, .cfg_d, .cfg_d_inv, .cfg_d_sqrt, .cfg_nvec, .cfg_n_iter,
    .d, .d_inv, .d_sqrt, .nvec, .n_iter, .nchunks,
    .load_en, .x_valid, .x_ready, .g_valid, .g_ready, .b_valid, .b_ready,
    .x_wr, .x_beat, .g_wr, .g_beat, .b_wr, .b_beat, .load_done);

  // ---------------- shared datapath request ------------------------------
  dp_req_t req, req_mean, req_shift, req_m, req_out;

  always_comb begin
    unique case (phase)
      PH_MEAN:  req = req_mean;
      PH_SHIFT: req = req_shift;
      PH_M:     req = req_m;
      PH_OUT:   req = req_out;
      default:  req = DP_REQ_IDLE;
    endcase
  end

  // ---------------- buffers ----------------------------------------------
  logic              ib_wr_en, ib_wr_full, g_we, b_we;
  logic [BW-1:0]     ib_wr_bank, g_bank, b_bank;
  logic [RW-1:0]     ib_wr_row, g_row, b_row;
  logic [LANES*W-1:0] ib_wr_data, ib_rd, g_rd, b_rd;
  logic [LANES*W-1:0] add_ew, mul_p, mul_p_q;
  logic [W-1:0]       add_sum;
  logic [16*W-1:0]    psum;

  buffer_controller #(.NB(NB), .HB(HB), .WB(WB), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_bufctl (
    .x_wr, .x_beat, .x_data, .g_wr, .g_beat, .b_wr, .b_beat,
    .wb_en(req.buf_wr), .wb_row(RW'(req.wr_row)), .wb_data(add_ew),
    .ib_wr_en, .ib_wr_full, .ib_wr_bank, .ib_wr_row, .ib_wr_data,
    .g_we, .g_bank, .g_row, .b_we, .b_bank, .b_row);

  input_buffer #(.NB(NB), .HB(HB), .WB(WB), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_ibuf (
    .clk, .wr_en(ib_wr_en), .wr_full(ib_wr_full), .wr_bank(ib_wr_bank), .wr_row(ib_wr_row),
    .wr_data(ib_wr_data), .rd_en(req.buf_rd), .rd_row(RW'(req.buf_row)), .rd_data(ib_rd));

  param_buffer #(.NB(NB), .HB(HB), .WB(WB), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_gbuf (
    .clk, .wr_en(g_we), .wr_bank(g_bank), .wr_row(g_row), .wr_data(g_data),
    .rd_en(req.g_rd), .rd_row(RW'(req.g_row)), .rd_data(g_rd));

  param_buffer #(.NB(NB), .HB(HB), .WB(WB), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_bbuf (
    .clk, .wr_en(b_we), .wr_bank(b_bank), .wr_row(b_row), .wr_data(b_data),
    .rd_en(req.b_rd), .rd_row(RW'(req.b_row)), .rd_data(b_rd));

  partial_sum_buffer #(.DEPTH(16), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_psum (
    .clk, .rst_n, .clear(req.psum_clr), .wr_en(req.psum_wr), .wr_idx(req.psum_idx),
    .wr_data(add_sum), .rd_data(psum));

  // ---------------- Mul block --------------------------------------------
  logic [LANES*W-1:0] mul_a, mul_b;
  logic               mul_ov;

  always_comb begin
    unique case (req.mul_a)
      MA_MULOUT: mul_a = mul_p_q;
      MA_SCALAR: mul_a = {LANES{req.mul_sa[W-1:0]}};
      default:   mul_a = ib_rd;
    endcase
    unique case (req.mul_b)
      MB_SCALAR: mul_b = {LANES{req.mul_sb[W-1:0]}};
      MB_GAMMA:  mul_b = g_rd;
      default:   mul_b = mul_a;
    endcase
  end

  mul_block #(.LANES(LANES), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_mul (
    .clk, .rst_n, .in_valid(req.mul_go), .a(mul_a), .b(mul_b), .out_valid(mul_ov), .p(mul_p));

  // y-hat is held one cycle before it re-enters the Mul block with gamma.
  always_ff @(posedge clk) mul_p_q <= mul_p;

  // ---------------- Add block --------------------------------------------
  logic [LANES*W-1:0] add_a, add_b;
  logic               add_ov;

  always_comb begin
    unique case (req.add_a)
      AA_MULOUT: add_a = mul_p;
      AA_PSUM:   add_a = (LANES*W)'(psum);
      default:   add_a = ib_rd;
    endcase
    add_b = (req.add_b == AB_BETA) ? b_rd : {LANES{req.add_sb[W-1:0]}};
  end

  add_block #(.LANES(LANES), .EXP_W(EXP_W), .MAN_W(MAN_W)) u_add (
    .clk, .rst_n, .in_valid(req.add_go), .mode(req.add_mode), .a(add_a), .b(add_b),
    .nlanes(req.add_nlanes), .out_valid(add_ov), .sum(add_sum), .ew(add_ew));

  // ---------------- phase controllers ------------------------------------
  logic start_mean, start_shift, start_m, start_iter, start_out;
  logic mean_done, shift_done, m_done, iter_done, out_done;
  logic z_v;

  mean_controller #(.EXP_W(EXP_W), .MAN_W(MAN_W), .LANES(LANES)) u_meanctl (
    .clk, .rst_n, .start(start_mean), .base, .nchunks, .d, .d_inv,
    .add_sum, .mul_p0(mul_p[W-1:0]), .req(req_mean), .done(mean_done), .mean);

  shift_controller #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_shiftctl (
    .clk, .rst_n, .start(start_shift), .base, .nchunks, .mean, .req(req_shift), .done(shift_done));

  m_controller #(.EXP_W(EXP_W), .MAN_W(MAN_W), .LANES(LANES)) u_mctl (
    .clk, .rst_n, .start(start_m), .base, .nchunks, .d, .add_sum, .req(req_m), .done(m_done), .m);

  iteration_controller #(.EXP_W(EXP_W), .MAN_W(MAN_W), .ITER_W(4)) u_iterctl (
    .clk, .rst_n, .start(start_iter), .m, .n_iter, .d_sqrt, .done(iter_done), .scale, .a_inf);

  output_controller #(.EXP_W(EXP_W), .MAN_W(MAN_W), .LANES(LANES)) u_outctl (
    .clk, .rst_n, .start(start_out), .base, .nchunks, .d, .scale, .req(req_out),
    .z_valid(z_v), .z_chunk, .z_nlanes, .done(out_done));

  main_controller u_main (
    .clk, .rst_n, .cfg_valid, .load_done, .nvec, .nchunks,
    .mean_done, .shift_done, .m_done, .iter_done, .out_done,
    .phase, .load_en, .start_mean, .start_shift, .start_m, .start_iter, .start_out,
    .vec, .base, .busy, .all_done(done));

  assign z_valid = z_v;
  assign z_data  = add_ew;
  assign z_vec   = vec;

  // The Add and Mul results are consumed exactly when the schedules expect.
  a_psum_after_add: assert property (@(posedge clk) disable iff (!rst_n) req.psum_wr |-> add_ov);
  a_wb_after_add:   assert property (@(posedge clk) disable iff (!rst_n) req.buf_wr |-> add_ov);
  a_z_after_add:    assert property (@(posedge clk) disable iff (!rst_n) z_v |-> add_ov);
  a_mulout_valid:   assert property (@(posedge clk) disable iff (!rst_n)
                                     (req.add_go && req.add_a == AA_MULOUT) |-> mul_ov);
endmodule
