// axpy: streaming z = alpha * x + y.
//
// W lanes, each a multiplier followed by an adder, then LAT_M + LAT_A
// pipeline registers for the latency of the two hardened operators. A beat is
// taken only when both input streams offer one (the two pops of the source's
// loop body happen together). Initiation interval 1: N elements take
// LAT_M + LAT_A + N/W cycles. The lane structure follows the source's map
// pattern; handshake and latency placement are this design's choice.
module axpy
  import fblas_pkg::*;
#(
  parameter int W     = 16,
  parameter int LAT_M = 6,
  parameter int LAT_A = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fp32_t           alpha,
  input  logic            x_valid,
  output logic            x_ready,
  input  fp32_t [W-1:0]   x_data,
  input  logic            y_valid,
  output logic            y_ready,
  input  fp32_t [W-1:0]   y_data,
  output logic            out_valid,
  input  logic            out_ready,
  output fp32_t [W-1:0]   out_data
);
  fp32_t [W-1:0] res;
  logic          in_ready;

  always_comb begin
    for (int i = 0; i < W; i++) res[i] = fp_add(fp_mul(alpha, x_data[i]), y_data[i]);
  end

  assign x_ready = in_ready && y_valid;
  assign y_ready = in_ready && x_valid;

  stall_pipe #(.WIDTH(32*W), .DEPTH(LAT_M + LAT_A)) u_pipe (
    .clk, .rst_n,
    .in_valid (x_valid && y_valid), .in_ready (in_ready), .in_data (res),
    .out_valid, .out_ready, .out_data
  );
endmodule
