// bicg: streaming composition q = A p and s = A^T r with A read once.
//
// One stream of A (N x M, tiles of TN x TM by rows) is forked through two
// channels to a gemv (q = A p, p replayed once per tile row) and a gemv_t
// (s = A^T r). Both use the same tile order, which is what lets them share
// the matrix; the matrix traffic halves from 2NM to NM. gemv's y input is
// fed with zeros internally (beta = 0, alpha = 1). gemv_t replays s: it reads
// a block of s, adds the tile's contribution and writes it back, N/TN times,
// so s_in must return what s_out wrote (zeros on the first tile row).
// The fork stalls A whenever either channel is full, so the two modules run
// in lockstep up to the channel depth. Structure follows the source's BICG
// graph; channel depth and the replay of s are this design's choices.
// Interface: valid/ready streams of W elements; tiles_n = N/TN, tiles_m = M/TM.
module bicg
  import fblas_pkg::*;
#(
  parameter int W          = 16,
  parameter int TN         = 1024,
  parameter int TM         = 1024,
  parameter int FIFO_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [15:0]     tiles_n,
  input  logic [15:0]     tiles_m,
  input  logic            a_valid,
  output logic            a_ready,
  input  fp32_t [W-1:0]   a_data,
  input  logic            p_valid,
  output logic            p_ready,
  input  fp32_t [W-1:0]   p_data,
  input  logic            r_valid,
  output logic            r_ready,
  input  fp32_t [W-1:0]   r_data,
  input  logic            s_in_valid,
  output logic            s_in_ready,
  input  fp32_t [W-1:0]   s_in_data,
  output logic            q_valid,
  input  logic            q_ready,
  output fp32_t [W-1:0]   q_data,
  output logic            s_valid,
  input  logic            s_ready,
  output fp32_t [W-1:0]   s_data
);
  logic          f0_valid, f0_ready, f1_valid, f1_ready;
  logic          a0_valid, a0_ready, a1_valid, a1_ready, zy_ready;
  fp32_t [W-1:0] f0_data, f1_data, a0_data, a1_data;

  stream_fork #(.WIDTH(32*W)) u_fork (
    .in_valid (a_valid), .in_ready (a_ready), .in_data (a_data),
    .out0_valid (f0_valid), .out0_ready (f0_ready), .out0_data (f0_data),
    .out1_valid (f1_valid), .out1_ready (f1_ready), .out1_data (f1_data)
  );

  channel_fifo #(.WIDTH(32*W), .DEPTH(FIFO_DEPTH)) u_ch_a0 (
    .clk, .rst_n,
    .in_valid (f0_valid), .in_ready (f0_ready), .in_data (f0_data),
    .out_valid (a0_valid), .out_ready (a0_ready), .out_data (a0_data)
  );
  channel_fifo #(.WIDTH(32*W), .DEPTH(FIFO_DEPTH)) u_ch_a1 (
    .clk, .rst_n,
    .in_valid (f1_valid), .in_ready (f1_ready), .in_data (f1_data),
    .out_valid (a1_valid), .out_ready (a1_ready), .out_data (a1_data)
  );

  gemv #(.W(W), .TN(TN), .TM(TM)) u_gemv (
    .clk, .rst_n, .alpha (FP_ONE), .beta (FP_ZERO), .tiles_n, .tiles_m,
    .x_valid (p_valid), .x_ready (p_ready), .x_data (p_data),
    .y_valid (1'b1), .y_ready (zy_ready), .y_data ('0),
    .a_valid (a0_valid), .a_ready (a0_ready), .a_data (a0_data),
    .out_valid (q_valid), .out_ready (q_ready), .out_data (q_data)
  );

  gemv_t #(.W(W), .TN(TN), .TM(TM)) u_gemv_t (
    .clk, .rst_n, .alpha (FP_ONE), .beta (FP_ZERO), .tiles_n, .tiles_m,
    .x_valid (r_valid), .x_ready (r_ready), .x_data (r_data),
    .y_valid (s_in_valid), .y_ready (s_in_ready), .y_data (s_in_data),
    .a_valid (a1_valid), .a_ready (a1_ready), .a_data (a1_data),
    .out_valid (s_valid), .out_ready (s_ready), .out_data (s_data)
  );
endmodule
