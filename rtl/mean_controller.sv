// mean_controller: the x-bar controller, computes the mean of one vector.
//
// After `start` it reads the C = ceil(d/64) chunks of the vector from the
// Input buffer (rows base..base+C-1), sums each chunk in the Add block
// (accumulate mode, lanes beyond d masked) and stores the chunk sums in the
// Partial sum buffer.  It then sums the partial sums in the Add block and
// multiplies the total by the stored d^-1 in the Mul block.  `mean` is valid
// from the cycle `done` pulses.  Schedule, with t counted from start:
//   t = 0..C-1      read row base+t
//   t = 1..C        Add (accumulate) chunk t-1
//   t = 3..C+2      store chunk sum t-3 in the Partial sum buffer
//   t = C+3         Add (accumulate) the C partial sums
//   t = C+5         Mul total * d^-1
//   t = C+7         mean registered, done
// The sequence of operations is the paper's; the schedule is this design's.
// Fields of the datapath request that this phase never uses (for
// example the Mul controls in the mean phase) are constant zero.
module mean_controller
  import iterl2norm_pkg::*;
#(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  parameter int LANES = 64,
  localparam int W    = EXP_W + MAN_W + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [3:0]   base,
  input  logic [4:0]   nchunks,
  input  logic [10:0]  d,
  input  logic [W-1:0] d_inv,
  input  logic [W-1:0] add_sum,
  input  logic [W-1:0] mul_p0,
  output dp_req_t      req,
  output logic         done,
  output logic [W-1:0] mean
);
  logic       busy;
  logic [7:0] t;
  int         ti, c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      done <= 1'b0;
      mean <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        t    <= '0;
      end else if (busy) begin
        t <= t + 8'd1;
        if (int'(t) == int'(nchunks) + 7) begin
          busy <= 1'b0;
          done <= 1'b1;
          mean <= mul_p0;
        end
      end
    end
  end

  always_comb begin
    req = DP_REQ_IDLE;
    ti  = int'(t);
    c   = int'(nchunks);
    if (busy) begin
      if (ti == 0) req.psum_clr = 1'b1;
      if (ti < c) begin
        req.buf_rd  = 1'b1;
        req.buf_row = base + 4'(ti);
      end
      if (ti >= 1 && ti <= c) begin
        req.add_go     = 1'b1;
        req.add_mode   = ADD_ACC;
        req.add_a      = AA_BUF;
        req.add_nlanes = chunk_lanes(d, 5'(ti - 1), LANES);
      end
      if (ti >= 3 && ti <= c + 2) begin
        req.psum_wr  = 1'b1;
        req.psum_idx = 4'(ti - 3);
      end
      if (ti == c + 3) begin
        req.add_go     = 1'b1;
        req.add_mode   = ADD_ACC;
        req.add_a      = AA_PSUM;
        req.add_nlanes = 7'(c);
      end
      if (ti == c + 5) begin
        req.mul_go = 1'b1;
        req.mul_a  = MA_SCALAR;
        req.mul_b  = MB_SCALAR;
        req.mul_sa = 32'(add_sum);
        req.mul_sb = 32'(d_inv);
      end
    end
  end
endmodule
