// m_controller: computes m = ||y||^2 of the mean-shifted vector.
//
// After `start` it reads the C chunks of y, squares them lane by lane in the
// Mul block, sums each squared chunk in the Add block (accumulate mode,
// lanes beyond d masked), collects the chunk sums in the Partial sum buffer
// and finally sums those.  `m` is valid from the cycle `done` pulses.
// Schedule:
//   t = 0..C-1      read row base+t
//   t = 1..C        Mul y*y of chunk t-1
//   t = 3..C+2      Add (accumulate) squared chunk t-3
//   t = 5..C+4      store chunk sum t-5
//   t = C+5         Add (accumulate) the C partial sums
//   t = C+7         m registered, done
// Fields of the datapath request that this phase never uses (for
// example the Mul controls in the mean phase) are constant zero.
module m_controller
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
  input  logic [W-1:0] add_sum,
  output dp_req_t      req,
  output logic         done,
  output logic [W-1:0] m
);
  logic       busy;
  logic [7:0] t;
  int         ti, c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      done <= 1'b0;
      m    <= '0;
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
          m    <= add_sum;
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
        req.mul_go = 1'b1;
        req.mul_a  = MA_BUF;
        req.mul_b  = MB_SAME;
      end
      if (ti >= 3 && ti <= c + 2) begin
        req.add_go     = 1'b1;
        req.add_mode   = ADD_ACC;
        req.add_a      = AA_MULOUT;
        req.add_nlanes = chunk_lanes(d, 5'(ti - 3), LANES);
      end
      if (ti >= 5 && ti <= c + 4) begin
        req.psum_wr  = 1'b1;
        req.psum_idx = 4'(ti - 5);
      end
      if (ti == c + 5) begin
        req.add_go     = 1'b1;
        req.add_mode   = ADD_ACC;
        req.add_a      = AA_PSUM;
        req.add_nlanes = 7'(c);
      end
    end
  end
endmodule
