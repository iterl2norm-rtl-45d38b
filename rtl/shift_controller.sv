// shift_controller: subtracts the mean from every element of one vector.
//
// After `start` it reads the C chunks of the vector, adds -mean to every
// lane in the Add block's element-wise (mean-shift) mode and writes the
// result y = x - mean back over the same Input buffer row.  One chunk is
// issued per cycle; `done` pulses in the cycle of the last write, so the
// next phase may read the rows from the following cycle.  Schedule:
//   t = 0..C-1      read row base+t
//   t = 1..C        Add (element-wise) chunk t-1 with -mean
//   t = 3..C+2      write chunk t-3 back; done at t = C+2
// Fields of the datapath request that this phase never uses (for
// example the Mul controls in the mean phase) are constant zero.
module shift_controller
  import iterl2norm_pkg::*;
#(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [3:0]   base,
  input  logic [4:0]   nchunks,
  input  logic [W-1:0] mean,
  output dp_req_t      req,
  output logic         done
);
  logic       busy;
  logic [7:0] t;
  int         ti, c;
  logic [W-1:0] neg_mean;

  assign neg_mean = {~mean[W-1], mean[W-2:0]};
  assign done     = busy && (int'(t) == int'(nchunks) + 2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
    end else if (start) begin
      busy <= 1'b1;
      t    <= '0;
    end else if (busy) begin
      t <= t + 8'd1;
      if (done) busy <= 1'b0;
    end
  end

  always_comb begin
    req = DP_REQ_IDLE;
    ti  = int'(t);
    c   = int'(nchunks);
    if (busy) begin
      if (ti < c) begin
        req.buf_rd  = 1'b1;
        req.buf_row = base + 4'(ti);
      end
      if (ti >= 1 && ti <= c) begin
        req.add_go   = 1'b1;
        req.add_mode = ADD_EW;
        req.add_a    = AA_BUF;
        req.add_b    = AB_SCALAR;
        req.add_sb   = 32'(neg_mean);
      end
      if (ti >= 3 && ti <= c + 2) begin
        req.buf_wr = 1'b1;
        req.wr_row = base + 4'(ti - 3);
      end
    end
  end
endmodule
