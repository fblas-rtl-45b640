// fblas_top: the streaming BLAS modules and compositions that were evaluated,
// side by side on one device.
//
// Contents (each an independent accelerator with its own streams, as the
// kernels of one FPGA image would be):
//   scal      vector scaling (the "map" example of the work/depth model)
//   axpydot   axpy -> dot composition (z = w - alpha v, beta = z^T u)
//   bicg      q = A p and s = A^T r on one shared stream of A
//   gemver    component 1: ger -> ger -> gemv_t, component 2: gemv
//   gemm      PR x PC systolic matrix multiply with feeders and drainers
// Every stream port is one valid/ready channel (name_valid, name_ready,
// name_data) to be attached to an interface module that reads or writes
// off-chip memory; those helpers, the memory controllers and the host link
// depend on the board and are outside this design. Scalars (alpha, beta,
// sizes in tiles or beats) are inputs held stable during a call.
// Defaults: vector width 16 and 1024 x 1024 tiles for the Level 1/2
// modules, as in the source's composition experiments; a 40 x 80 array with
// 960 x 960 memory tiles for GEMM, its largest single-precision array.
// Timing: all modules take one beat per cycle per stream when not stalled;
// see each module for its schedule and latency.
module fblas_top
  import fblas_pkg::*;
#(
  parameter int W          = 16,
  parameter int TN         = 1024,
  parameter int TM         = 1024,
  parameter int LAT_M      = 6,
  parameter int LAT_A      = 6,
  parameter int FIFO_DEPTH = 64,
  parameter int PR         = 40,
  parameter int PC         = 80,
  parameter int TR         = 960,
  parameter int TC         = 960
) (
  input  logic           clk,
  input  logic           rst_n,
  // scalars
  input  fp32_t          scal_alpha,
  input  fp32_t          axpydot_alpha,
  input  logic [31:0]    axpydot_n_beats,
  input  logic [15:0]    bicg_tiles_n,
  input  logic [15:0]    bicg_tiles_m,
  input  fp32_t          gemver_alpha,
  input  fp32_t          gemver_beta,
  input  logic [15:0]    gemver_tiles_n,
  input  logic [15:0]    gemm_tiles_r,
  input  logic [15:0]    gemm_tiles_c,
  input  logic [15:0]    gemm_k_len,
  // streams
  input  logic           scal_x_valid,
  output logic           scal_x_ready,
  input  fp32_t [W-1:0]  scal_x_data,
  output logic           scal_out_valid,
  input  logic           scal_out_ready,
  output fp32_t [W-1:0]  scal_out_data,
  input  logic           axpydot_v_valid,
  output logic           axpydot_v_ready,
  input  fp32_t [W-1:0]  axpydot_v_data,
  input  logic           axpydot_w_valid,
  output logic           axpydot_w_ready,
  input  fp32_t [W-1:0]  axpydot_w_data,
  input  logic           axpydot_u_valid,
  output logic           axpydot_u_ready,
  input  fp32_t [W-1:0]  axpydot_u_data,
  output logic           axpydot_res_valid,
  input  logic           axpydot_res_ready,
  output fp32_t          axpydot_res_data,
  input  logic           bicg_a_valid,
  output logic           bicg_a_ready,
  input  fp32_t [W-1:0]  bicg_a_data,
  input  logic           bicg_p_valid,
  output logic           bicg_p_ready,
  input  fp32_t [W-1:0]  bicg_p_data,
  input  logic           bicg_r_valid,
  output logic           bicg_r_ready,
  input  fp32_t [W-1:0]  bicg_r_data,
  input  logic           bicg_s_in_valid,
  output logic           bicg_s_in_ready,
  input  fp32_t [W-1:0]  bicg_s_in_data,
  output logic           bicg_q_valid,
  input  logic           bicg_q_ready,
  output fp32_t [W-1:0]  bicg_q_data,
  output logic           bicg_s_valid,
  input  logic           bicg_s_ready,
  output fp32_t [W-1:0]  bicg_s_data,
  input  logic           gemver_a_valid,
  output logic           gemver_a_ready,
  input  fp32_t [W-1:0]  gemver_a_data,
  input  logic           gemver_u1_valid,
  output logic           gemver_u1_ready,
  input  fp32_t [W-1:0]  gemver_u1_data,
  input  logic           gemver_v1_valid,
  output logic           gemver_v1_ready,
  input  fp32_t [W-1:0]  gemver_v1_data,
  input  logic           gemver_u2_valid,
  output logic           gemver_u2_ready,
  input  fp32_t [W-1:0]  gemver_u2_data,
  input  logic           gemver_v2_valid,
  output logic           gemver_v2_ready,
  input  fp32_t [W-1:0]  gemver_v2_data,
  input  logic           gemver_y_valid,
  output logic           gemver_y_ready,
  input  fp32_t [W-1:0]  gemver_y_data,
  input  logic           gemver_x_in_valid,
  output logic           gemver_x_in_ready,
  input  fp32_t [W-1:0]  gemver_x_in_data,
  output logic           gemver_b_valid,
  input  logic           gemver_b_ready,
  output fp32_t [W-1:0]  gemver_b_data,
  output logic           gemver_x_valid,
  input  logic           gemver_x_ready,
  output fp32_t [W-1:0]  gemver_x_data,
  input  logic           gemver_b2_valid,
  output logic           gemver_b2_ready,
  input  fp32_t [W-1:0]  gemver_b2_data,
  input  logic           gemver_x2_valid,
  output logic           gemver_x2_ready,
  input  fp32_t [W-1:0]  gemver_x2_data,
  output logic           gemver_w_valid,
  input  logic           gemver_w_ready,
  output fp32_t [W-1:0]  gemver_w_data,
  input  logic           gemm_a_valid,
  output logic           gemm_a_ready,
  input  fp32_t [PR-1:0] gemm_a_data,
  input  logic           gemm_b_valid,
  output logic           gemm_b_ready,
  input  fp32_t [PC-1:0] gemm_b_data,
  output logic           gemm_c_valid,
  input  logic           gemm_c_ready,
  output fp32_t [PC-1:0] gemm_c_data
);
  scal #(.W(W), .LAT_M(LAT_M)) u_scal (
    .clk, .rst_n, .alpha (scal_alpha),
    .x_valid (scal_x_valid), .x_ready (scal_x_ready), .x_data (scal_x_data),
    .out_valid (scal_out_valid), .out_ready (scal_out_ready), .out_data (scal_out_data)
  );

  axpydot #(.W(W), .LAT_M(LAT_M), .LAT_A(LAT_A), .FIFO_DEPTH(FIFO_DEPTH)) u_axpydot (
    .clk, .rst_n, .alpha (axpydot_alpha), .n_beats (axpydot_n_beats),
    .v_valid (axpydot_v_valid), .v_ready (axpydot_v_ready), .v_data (axpydot_v_data),
    .w_valid (axpydot_w_valid), .w_ready (axpydot_w_ready), .w_data (axpydot_w_data),
    .u_valid (axpydot_u_valid), .u_ready (axpydot_u_ready), .u_data (axpydot_u_data),
    .res_valid (axpydot_res_valid), .res_ready (axpydot_res_ready), .res_data (axpydot_res_data)
  );

  bicg #(.W(W), .TN(TN), .TM(TM), .FIFO_DEPTH(FIFO_DEPTH)) u_bicg (
    .clk, .rst_n, .tiles_n (bicg_tiles_n), .tiles_m (bicg_tiles_m),
    .a_valid (bicg_a_valid), .a_ready (bicg_a_ready), .a_data (bicg_a_data),
    .p_valid (bicg_p_valid), .p_ready (bicg_p_ready), .p_data (bicg_p_data),
    .r_valid (bicg_r_valid), .r_ready (bicg_r_ready), .r_data (bicg_r_data),
    .s_in_valid (bicg_s_in_valid), .s_in_ready (bicg_s_in_ready), .s_in_data (bicg_s_in_data),
    .q_valid (bicg_q_valid), .q_ready (bicg_q_ready), .q_data (bicg_q_data),
    .s_valid (bicg_s_valid), .s_ready (bicg_s_ready), .s_data (bicg_s_data)
  );

  gemver #(.W(W), .TN(TN), .FIFO_DEPTH(FIFO_DEPTH)) u_gemver (
    .clk, .rst_n, .alpha (gemver_alpha), .beta (gemver_beta), .tiles_n (gemver_tiles_n),
    .a_valid (gemver_a_valid), .a_ready (gemver_a_ready), .a_data (gemver_a_data),
    .u1_valid (gemver_u1_valid), .u1_ready (gemver_u1_ready), .u1_data (gemver_u1_data),
    .v1_valid (gemver_v1_valid), .v1_ready (gemver_v1_ready), .v1_data (gemver_v1_data),
    .u2_valid (gemver_u2_valid), .u2_ready (gemver_u2_ready), .u2_data (gemver_u2_data),
    .v2_valid (gemver_v2_valid), .v2_ready (gemver_v2_ready), .v2_data (gemver_v2_data),
    .y_valid (gemver_y_valid), .y_ready (gemver_y_ready), .y_data (gemver_y_data),
    .x_in_valid (gemver_x_in_valid), .x_in_ready (gemver_x_in_ready), .x_in_data (gemver_x_in_data),
    .b_valid (gemver_b_valid), .b_ready (gemver_b_ready), .b_data (gemver_b_data),
    .x_valid (gemver_x_valid), .x_ready (gemver_x_ready), .x_data (gemver_x_data),
    .b2_valid (gemver_b2_valid), .b2_ready (gemver_b2_ready), .b2_data (gemver_b2_data),
    .x2_valid (gemver_x2_valid), .x2_ready (gemver_x2_ready), .x2_data (gemver_x2_data),
    .w_valid (gemver_w_valid), .w_ready (gemver_w_ready), .w_data (gemver_w_data)
  );

  gemm_systolic #(.PR(PR), .PC(PC), .TR(TR), .TC(TC)) u_gemm (
    .clk, .rst_n, .tiles_r (gemm_tiles_r), .tiles_c (gemm_tiles_c), .k_len (gemm_k_len),
    .a_valid (gemm_a_valid), .a_ready (gemm_a_ready), .a_data (gemm_a_data),
    .b_valid (gemm_b_valid), .b_ready (gemm_b_ready), .b_data (gemm_b_data),
    .c_valid (gemm_c_valid), .c_ready (gemm_c_ready), .c_data (gemm_c_data)
  );
endmodule
