// output_controller: produces z = gamma * (a_inf d^1/2 * y) + beta.
//
// For every chunk c of the mean-shifted vector y it issues, in the shared
// Mul and Add blocks: y * scale (scale = a_inf * d^1/2 from the iteration
// controller) giving y-hat, then y-hat * gamma, then + beta.  A chunk is
// started every two cycles because each chunk uses the single Mul block
// twice (odd and even cycles).  Per chunk, with t0 = 2c:
//   t0      read Input buffer row base+c
//   t0+1    Mul y * scale
//   t0+3    read gamma row c
//   t0+4    Mul y-hat * gamma (y-hat held one cycle by the top)
//   t0+5    read beta row c
//   t0+6    Add (element-wise) gamma*y-hat + beta
//   t0+8    z of chunk c valid (z_valid, z_chunk, z_nlanes)
// `done` pulses with the last chunk's z.  The paper gives the operations;
// the interleaving is this design's.
// Fields of the datapath request that this phase never uses (for
// example the Mul controls in the mean phase) are constant zero.
module output_controller
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
  input  logic [W-1:0] scale,
  output dp_req_t      req,
  output logic         z_valid,
  output logic [3:0]   z_chunk,
  output logic [6:0]   z_nlanes,
  output logic         done
);
  logic       busy;
  logic [7:0] t;
  int         ti, c;

  // z of chunk (t-8)/2 is on the Add output when t is even and 8 <= t <= 2C+6.
  always_comb begin
    ti       = int'(t);
    c        = int'(nchunks);
    z_valid  = busy && ti >= 8 && ti % 2 == 0 && ti <= 2 * c + 6;
    z_chunk  = 4'((ti - 8) / 2);
    z_nlanes = chunk_lanes(d, 5'((ti - 8) / 2), LANES);
    done     = busy && ti == 2 * c + 6;
  end

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
    if (busy) begin
      // Even cycles: Input buffer read (chunk t/2), second Mul (chunk (t-4)/2),
      // Add (chunk (t-6)/2).  Odd cycles: first Mul (chunk (t-1)/2), gamma
      // read (chunk (t-3)/2), beta read (chunk (t-5)/2).
      if (ti % 2 == 0) begin
        if (ti / 2 < c) begin
          req.buf_rd  = 1'b1;
          req.buf_row = base + 4'(ti / 2);
        end
        if (ti >= 4 && (ti - 4) / 2 < c) begin
          req.mul_go = 1'b1;
          req.mul_a  = MA_MULOUT;
          req.mul_b  = MB_GAMMA;
        end
        if (ti >= 6 && (ti - 6) / 2 < c) begin
          req.add_go   = 1'b1;
          req.add_mode = ADD_EW;
          req.add_a    = AA_MULOUT;
          req.add_b    = AB_BETA;
        end
      end else begin
        if ((ti - 1) / 2 < c) begin
          req.mul_go = 1'b1;
          req.mul_a  = MA_BUF;
          req.mul_b  = MB_SCALAR;
          req.mul_sb = 32'(scale);
        end
        if (ti >= 3 && (ti - 3) / 2 < c) begin
          req.g_rd  = 1'b1;
          req.g_row = 4'((ti - 3) / 2);
        end
        if (ti >= 5 && (ti - 5) / 2 < c) begin
          req.b_rd  = 1'b1;
          req.b_row = 4'((ti - 5) / 2);
        end
      end
    end
  end
endmodule
