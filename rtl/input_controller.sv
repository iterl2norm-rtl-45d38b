// input_controller: receives the configuration and the three input channels.
//
// Channel 1 carries the configuration (d, d^-1, d^1/2, the number of vectors
// N and the number of iteration steps n_iter) on cfg_valid, and the input
// vectors x; channel 2 carries gamma and channel 3 beta.  Each data channel
// is a valid/ready stream of WB elements (one bank row) per beat.  While
// load_en is high the controller accepts beats and numbers them; x needs
// N*C*NB beats and gamma and beta C*NB beats each, where C = ceil(d/64):
// every vector starts on a chunk boundary and beats beyond d carry padding.
// load_done rises once all three streams are complete and stays high until
// the next cfg_valid.  The stored configuration is the "pre-stored" d^-1
// and d^1/2 of the paper; the channel protocol is this design's choice.
module input_controller #(
  parameter int NB     = 8,
  parameter int HB     = 16,
  parameter int WB     = 8,
  parameter int EXP_W  = 8,
  parameter int MAN_W  = 23,
  parameter int ITER_W = 4,
  localparam int W     = EXP_W + MAN_W + 1,
  localparam int KW    = $clog2(NB * HB) + 1    // beat counter width
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration (channel 1)
  input  logic              cfg_valid,
  input  logic [10:0]       cfg_d,
  input  logic [W-1:0]      cfg_d_inv,
  input  logic [W-1:0]      cfg_d_sqrt,
  input  logic [4:0]        cfg_nvec,
  input  logic [ITER_W-1:0] cfg_n_iter,
  output logic [10:0]       d,
  output logic [W-1:0]      d_inv,
  output logic [W-1:0]      d_sqrt,
  output logic [4:0]        nvec,
  output logic [ITER_W-1:0] n_iter,
  output logic [4:0]        nchunks,
  // data channels
  input  logic              load_en,
  input  logic              x_valid,
  output logic              x_ready,
  input  logic              g_valid,
  output logic              g_ready,
  input  logic              b_valid,
  output logic              b_ready,
  // accepted beats, numbered from 0
  output logic              x_wr,
  output logic [KW-1:0]     x_beat,
  output logic              g_wr,
  output logic [KW-1:0]     g_beat,
  output logic              b_wr,
  output logic [KW-1:0]     b_beat,
  output logic              load_done
);
  logic [KW-1:0] x_need, p_need;

  assign x_need  = KW'(nvec) * KW'(nchunks) * KW'(NB);
  assign p_need  = KW'(nchunks) * KW'(NB);
  assign x_ready = load_en && (x_beat < x_need);
  assign g_ready = load_en && (g_beat < p_need);
  assign b_ready = load_en && (b_beat < p_need);
  assign x_wr    = x_valid && x_ready;
  assign g_wr    = g_valid && g_ready;
  assign b_wr    = b_valid && b_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      d         <= '0;
      d_inv     <= '0;
      d_sqrt    <= '0;
      nvec      <= '0;
      n_iter    <= '0;
      nchunks   <= '0;
      x_beat    <= '0;
      g_beat    <= '0;
      b_beat    <= '0;
      load_done <= 1'b0;
    end else if (cfg_valid) begin
      d         <= cfg_d;
      d_inv     <= cfg_d_inv;
      d_sqrt    <= cfg_d_sqrt;
      nvec      <= cfg_nvec;
      n_iter    <= cfg_n_iter;
      nchunks   <= 5'((cfg_d + 11'(NB * WB - 1)) / 11'(NB * WB));
      x_beat    <= '0;
      g_beat    <= '0;
      b_beat    <= '0;
      load_done <= 1'b0;
    end else begin
      if (x_wr) x_beat <= x_beat + 1'b1;
      if (g_wr) g_beat <= g_beat + 1'b1;
      if (b_wr) b_beat <= b_beat + 1'b1;
      if (load_en && x_need != '0 && x_beat == x_need && g_beat == p_need && b_beat == p_need)
        load_done <= 1'b1;
    end
  end
endmodule
