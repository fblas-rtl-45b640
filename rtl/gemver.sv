// gemver: B = A + u1 v1^T + u2 v2^T, x = beta B^T y + z, w = alpha B x,
// as two streaming components that run one after the other.
//
// Component 1: the stream of A (N x N, tiles of TN x TN by rows) passes two
// chained ger modules (alpha = 1) and so becomes B without touching memory.
// B is forked: one copy goes out to be stored, the other through a channel
// into a gemv_t computing x = beta*B^T*y + z. gemv_t replays x: on the first
// tile row it reads z, afterwards the partial x it wrote before, so the
// x_in stream must return what x_out wrote.
// Component 2: once B and x are complete in memory, a gemv computes
// w = alpha*B*x (its y input is zero inside, beta = 0).
// A full single streaming graph is impossible here without channels of
// O(N*TN) words (x must be complete before w can start), which is why the
// source splits the computation at that point; matrix I/O drops from about
// 8N^2 to 3N^2. The structure follows the source's GEMVER graph; channel
// depths and the replay of x are this design's choices.
// Interface: valid/ready streams of W elements; tiles_n = N/TN; the two
// components have separate ports and may also run at the same time on
// unrelated data.
module gemver
  import fblas_pkg::*;
#(
  parameter int W          = 16,
  parameter int TN         = 1024,
  parameter int FIFO_DEPTH = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fp32_t           alpha,
  input  fp32_t           beta,
  input  logic [15:0]     tiles_n,
  // component 1
  input  logic            a_valid,
  output logic            a_ready,
  input  fp32_t [W-1:0]   a_data,
  input  logic            u1_valid,
  output logic            u1_ready,
  input  fp32_t [W-1:0]   u1_data,
  input  logic            v1_valid,
  output logic            v1_ready,
  input  fp32_t [W-1:0]   v1_data,
  input  logic            u2_valid,
  output logic            u2_ready,
  input  fp32_t [W-1:0]   u2_data,
  input  logic            v2_valid,
  output logic            v2_ready,
  input  fp32_t [W-1:0]   v2_data,
  input  logic            y_valid,
  output logic            y_ready,
  input  fp32_t [W-1:0]   y_data,
  input  logic            x_in_valid,
  output logic            x_in_ready,
  input  fp32_t [W-1:0]   x_in_data,
  output logic            b_valid,
  input  logic            b_ready,
  output fp32_t [W-1:0]   b_data,
  output logic            x_valid,
  input  logic            x_ready,
  output fp32_t [W-1:0]   x_data,
  // component 2
  input  logic            b2_valid,
  output logic            b2_ready,
  input  fp32_t [W-1:0]   b2_data,
  input  logic            x2_valid,
  output logic            x2_ready,
  input  fp32_t [W-1:0]   x2_data,
  output logic            w_valid,
  input  logic            w_ready,
  output fp32_t [W-1:0]   w_data
);
  logic          g1_valid, g1_ready, c1_valid, c1_ready, g2_valid, g2_ready;
  logic          f1_valid, f1_ready, bq_valid, bq_ready, zy_ready;
  fp32_t [W-1:0] g1_data, c1_data, g2_data, f1_data, bq_data;

  ger #(.W(W), .TN(TN), .TM(TN)) u_ger1 (
    .clk, .rst_n, .alpha (FP_ONE), .tiles_m (tiles_n),
    .x_valid (u1_valid), .x_ready (u1_ready), .x_data (u1_data),
    .y_valid (v1_valid), .y_ready (v1_ready), .y_data (v1_data),
    .a_valid, .a_ready, .a_data,
    .out_valid (g1_valid), .out_ready (g1_ready), .out_data (g1_data)
  );

  channel_fifo #(.WIDTH(32*W), .DEPTH(FIFO_DEPTH)) u_ch_g (
    .clk, .rst_n,
    .in_valid (g1_valid), .in_ready (g1_ready), .in_data (g1_data),
    .out_valid (c1_valid), .out_ready (c1_ready), .out_data (c1_data)
  );

  ger #(.W(W), .TN(TN), .TM(TN)) u_ger2 (
    .clk, .rst_n, .alpha (FP_ONE), .tiles_m (tiles_n),
    .x_valid (u2_valid), .x_ready (u2_ready), .x_data (u2_data),
    .y_valid (v2_valid), .y_ready (v2_ready), .y_data (v2_data),
    .a_valid (c1_valid), .a_ready (c1_ready), .a_data (c1_data),
    .out_valid (g2_valid), .out_ready (g2_ready), .out_data (g2_data)
  );

  stream_fork #(.WIDTH(32*W)) u_fork (
    .in_valid (g2_valid), .in_ready (g2_ready), .in_data (g2_data),
    .out0_valid (b_valid), .out0_ready (b_ready), .out0_data (b_data),
    .out1_valid (f1_valid), .out1_ready (f1_ready), .out1_data (f1_data)
  );

  channel_fifo #(.WIDTH(32*W), .DEPTH(FIFO_DEPTH)) u_ch_b (
    .clk, .rst_n,
    .in_valid (f1_valid), .in_ready (f1_ready), .in_data (f1_data),
    .out_valid (bq_valid), .out_ready (bq_ready), .out_data (bq_data)
  );

  gemv_t #(.W(W), .TN(TN), .TM(TN)) u_gemv_t (
    .clk, .rst_n, .alpha (beta), .beta (FP_ONE), .tiles_n, .tiles_m (tiles_n),
    .x_valid (y_valid), .x_ready (y_ready), .x_data (y_data),
    .y_valid (x_in_valid), .y_ready (x_in_ready), .y_data (x_in_data),
    .a_valid (bq_valid), .a_ready (bq_ready), .a_data (bq_data),
    .out_valid (x_valid), .out_ready (x_ready), .out_data (x_data)
  );

  gemv #(.W(W), .TN(TN), .TM(TN)) u_gemv (
    .clk, .rst_n, .alpha, .beta (FP_ZERO), .tiles_n, .tiles_m (tiles_n),
    .x_valid (x2_valid), .x_ready (x2_ready), .x_data (x2_data),
    .y_valid (1'b1), .y_ready (zy_ready), .y_data ('0),
    .a_valid (b2_valid), .a_ready (b2_ready), .a_data (b2_data),
    .out_valid (w_valid), .out_ready (w_ready), .out_data (w_data)
  );
endmodule
