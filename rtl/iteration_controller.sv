// iteration_controller: computes scale = a_inf * d^1/2 from m.
//
// On `start` it runs iter_init (4 cycles), loads a0 into iter_update, runs
// n_iter update steps (three cycles in iter_update plus one to issue the
// next; n_iter is programmable, 5 in the paper's measurements) and
// multiplies the final a by the stored d^1/2 in a dedicated multiplier.
// `done` pulses when `scale` and `a_inf` are valid, 4*n_iter + 7 cycles
// after start (5 initialise, 1 load, 4 per step, 1 scale).  The units and
// their order follow the paper (Fig. 2); the cycle counts are this design's.
module iteration_controller #(
  parameter int EXP_W  = 8,
  parameter int MAN_W  = 23,
  parameter int ITER_W = 4,
  localparam int W     = EXP_W + MAN_W + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [W-1:0]      m,
  input  logic [ITER_W-1:0] n_iter,
  input  logic [W-1:0]      d_sqrt,
  output logic              done,
  output logic [W-1:0]      scale,
  output logic [W-1:0]      a_inf
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_LOAD, S_STEP, S_WAIT, S_SCALE} state_e;
  state_e            state;
  logic              init_done, upd_busy, upd_last, load, step;
  logic [1:0]        wait_cnt;
  logic [W-1:0]      a0, delta, omega, a, scale_c;
  logic [ITER_W-1:0] left;

  iter_init #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_init (
    .clk, .rst_n, .start, .m, .done(init_done), .a0, .delta, .omega);

  iter_update #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_upd (
    .clk, .rst_n, .load, .step, .a0, .delta, .omega, .busy(upd_busy), .a);

  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_scale (.a(a), .b(d_sqrt), .y(scale_c));

  // The new a is written at the end of the third busy cycle of a step.
  assign upd_last = (state == S_WAIT) && upd_busy && (wait_cnt == 2'd2);

  always_ff @(posedge clk) begin
    if (state == S_WAIT) wait_cnt <= wait_cnt + 2'd1;
    else wait_cnt <= '0;
  end

  assign load = (state == S_LOAD);
  assign step = (state == S_STEP);
  assign a_inf = a;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      left  <= '0;
      scale <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_INIT;
        S_INIT:  if (init_done) begin
                   state <= S_LOAD;
                   left  <= n_iter;
                 end
        S_LOAD:  state <= (left == '0) ? S_SCALE : S_STEP;
        S_STEP:  begin
                   state <= S_WAIT;
                   left  <= left - 1'b1;
                 end
        S_WAIT:  if (upd_last) state <= (left == '0) ? S_SCALE : S_STEP;
        S_SCALE: begin
                   scale <= scale_c;
                   done  <= 1'b1;
                   state <= S_IDLE;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
