// scal: streaming vector scaling, out = alpha * x.
//
// Each beat carries W elements; the W multiplications are independent (a
// "map"), so the circuit is W multipliers side by side followed by LAT_M
// pipeline registers, the latency of one hardened multiplier. The module
// takes one beat per cycle (initiation interval 1), so N elements take
// LAT_M + N/W cycles. The whole pipe stalls when the output is not taken.
// alpha is a scalar held stable for the duration of a call. W = 16 follows
// the source (the width of its composition experiments); the source gives no
// operator latency, so LAT_M = 6 is this design's choice, as is the
// valid/ready handshake.
module scal
  import fblas_pkg::*;
#(
  parameter int W     = 16,
  parameter int LAT_M = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fp32_t           alpha,
  input  logic            x_valid,
  output logic            x_ready,
  input  fp32_t [W-1:0]   x_data,
  output logic            out_valid,
  input  logic            out_ready,
  output fp32_t [W-1:0]   out_data
);
  fp32_t [W-1:0] prod;

  always_comb begin
    for (int i = 0; i < W; i++) prod[i] = fp_mul(alpha, x_data[i]);
  end

  stall_pipe #(.WIDTH(32*W), .DEPTH(LAT_M)) u_pipe (
    .clk, .rst_n,
    .in_valid (x_valid), .in_ready (x_ready), .in_data (prod),
    .out_valid, .out_ready, .out_data
  );
endmodule
