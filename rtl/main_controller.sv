// main_controller: sequences the macro.
//
// After a configuration (cfg_valid) it enables loading; once the input
// controller reports load_done it processes the N stored vectors one after
// another.  For vector v (rows v*C .. v*C+C-1 of the Input buffer) it runs
// the phases MEAN, SHIFT, M, ITER and OUT, starting each phase's controller
// with a one-cycle pulse and waiting for its done.  `phase` tells the top
// which controller drives the shared Add and Mul blocks.  After the last
// vector it stays in DONE (busy low) until the next configuration.
// The phase order is the paper's (Sec. III); the handshakes are this
// design's.
module main_controller
  import iterl2norm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_valid,
  input  logic       load_done,
  input  logic [4:0] nvec,
  input  logic [4:0] nchunks,
  input  logic       mean_done,
  input  logic       shift_done,
  input  logic       m_done,
  input  logic       iter_done,
  input  logic       out_done,
  output phase_e     phase,
  output logic       load_en,
  output logic       start_mean,
  output logic       start_shift,
  output logic       start_m,
  output logic       start_iter,
  output logic       start_out,
  output logic [4:0] vec,
  output logic [3:0] base,
  output logic       busy,
  output logic       all_done
);
  logic pending;     // start pulse of the current phase not yet issued

  assign load_en  = (phase == PH_LOAD);
  assign busy     = (phase != PH_IDLE) && (phase != PH_DONE);
  assign all_done = (phase == PH_DONE);
  assign base     = 4'(vec * nchunks);

  assign start_mean  = pending && phase == PH_MEAN;
  assign start_shift = pending && phase == PH_SHIFT;
  assign start_m     = pending && phase == PH_M;
  assign start_iter  = pending && phase == PH_ITER;
  assign start_out   = pending && phase == PH_OUT;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      vec     <= '0;
      pending <= 1'b0;
    end else if (cfg_valid) begin
      phase   <= PH_LOAD;
      vec     <= '0;
      pending <= 1'b0;
    end else begin
      pending <= 1'b0;
      unique case (phase)
        PH_IDLE, PH_DONE: ;
        PH_LOAD:  if (load_done) begin
                    phase   <= PH_MEAN;
                    pending <= 1'b1;
                  end
        PH_MEAN:  if (mean_done) begin
                    phase   <= PH_SHIFT;
                    pending <= 1'b1;
                  end
        PH_SHIFT: if (shift_done) begin
                    phase   <= PH_M;
                    pending <= 1'b1;
                  end
        PH_M:     if (m_done) begin
                    phase   <= PH_ITER;
                    pending <= 1'b1;
                  end
        PH_ITER:  if (iter_done) begin
                    phase   <= PH_OUT;
                    pending <= 1'b1;
                  end
        PH_OUT:   if (out_done) begin
                    if (vec + 5'd1 >= nvec) begin
                      phase <= PH_DONE;
                    end else begin
                      vec     <= vec + 5'd1;
                      phase   <= PH_MEAN;
                      pending <= 1'b1;
                    end
                  end
        default:  phase <= PH_IDLE;
      endcase
    end
  end
endmodule
