// axpydot: streaming composition z = w - alpha*v, beta = z^T u.
//
// An axpy module (with -alpha) and a dot module connected by an on-chip
// channel, so z never goes to memory: the interface modules read v, w and u
// once and write one scalar, 3N+1 transfers in all. Both modules run at the
// same time, so a call takes about L_axpy + L_dot + N/W cycles instead of
// three passes over the data. The structure follows the source's AXPYDOT
// graph; the channel depth (FIFO_DEPTH beats) is this design's choice.
// Interface: valid/ready streams of W elements v, w, u and a scalar result;
// n_beats = N/W held stable for a call.
module axpydot
  import fblas_pkg::*;
#(
  parameter int W          = 16,
  parameter int LAT_M      = 6,
  parameter int LAT_A      = 6,
  parameter int FIFO_DEPTH = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fp32_t           alpha,
  input  logic [31:0]     n_beats,
  input  logic            v_valid,
  output logic            v_ready,
  input  fp32_t [W-1:0]   v_data,
  input  logic            w_valid,
  output logic            w_ready,
  input  fp32_t [W-1:0]   w_data,
  input  logic            u_valid,
  output logic            u_ready,
  input  fp32_t [W-1:0]   u_data,
  output logic            res_valid,
  input  logic            res_ready,
  output fp32_t           res_data
);
  logic          z_valid, z_ready, zq_valid, zq_ready;
  fp32_t [W-1:0] z_data, zq_data;

  axpy #(.W(W), .LAT_M(LAT_M), .LAT_A(LAT_A)) u_axpy (
    .clk, .rst_n, .alpha (fp_neg(alpha)),
    .x_valid (v_valid), .x_ready (v_ready), .x_data (v_data),
    .y_valid (w_valid), .y_ready (w_ready), .y_data (w_data),
    .out_valid (z_valid), .out_ready (z_ready), .out_data (z_data)
  );

  channel_fifo #(.WIDTH(32*W), .DEPTH(FIFO_DEPTH)) u_ch_z (
    .clk, .rst_n,
    .in_valid (z_valid), .in_ready (z_ready), .in_data (z_data),
    .out_valid (zq_valid), .out_ready (zq_ready), .out_data (zq_data)
  );

  dot #(.W(W), .LAT_M(LAT_M), .LAT_A(LAT_A)) u_dot (
    .clk, .rst_n, .n_beats,
    .x_valid (zq_valid), .x_ready (zq_ready), .x_data (zq_data),
    .y_valid (u_valid),  .y_ready (u_ready),  .y_data (u_data),
    .res_valid, .res_ready, .res_data
  );
endmodule
