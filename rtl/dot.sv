// dot: streaming dot product res = x^T y over n_beats beats of W elements.
//
// Per beat, W multipliers feed a balanced binary adder tree (the map-reduce
// circuit of the source, work 2W). The tree result passes LAT_M +
// log2(W)*LAT_A pipeline registers, the circuit depth of the source's model,
// and then enters a single-cycle accumulator, standing in for the device's
// native single-precision accumulation. After n_beats beats the accumulated
// value is offered on the res stream and the accumulator restarts, so calls
// follow each other without a reset. n_beats (N/W) is a scalar held stable
// during a call. Cycle count: the result is valid LAT_M + log2(W)*LAT_A +
// n_beats + 1 cycles after the first beat is taken, when inputs never run
// dry. W must be a power of two. Summation order (tree, then sequential
// accumulation) is fixed and follows the source's figure.
module dot
  import fblas_pkg::*;
#(
  parameter int W     = 16,
  parameter int LAT_M = 6,
  parameter int LAT_A = 6,
  parameter int CW    = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [CW-1:0]   n_beats,
  input  logic            x_valid,
  output logic            x_ready,
  input  fp32_t [W-1:0]   x_data,
  input  logic            y_valid,
  output logic            y_ready,
  input  fp32_t [W-1:0]   y_data,
  output logic            res_valid,
  input  logic            res_ready,
  output fp32_t           res_data
);
  localparam int LOGW = clog2i(W);

  fp32_t tree_sum, tree_out, acc;
  logic  in_ready, p_valid, p_ready;
  logic [CW-1:0] cnt;

  fp_dot_tree #(.W(W)) u_tree (.a (x_data), .b (y_data), .sum (tree_sum));

  assign x_ready = in_ready && y_valid;
  assign y_ready = in_ready && x_valid;

  stall_pipe #(.WIDTH(32), .DEPTH(LAT_M + LOGW*LAT_A)) u_pipe (
    .clk, .rst_n,
    .in_valid (x_valid && y_valid), .in_ready (in_ready), .in_data (tree_sum),
    .out_valid (p_valid), .out_ready (p_ready), .out_data (tree_out)
  );

  assign p_ready = !res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      acc       <= FP_ZERO;
      res_valid <= 1'b0;
      res_data  <= FP_ZERO;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (p_valid && p_ready) begin
        if (cnt == n_beats - CW'(1)) begin
          res_data  <= fp_add(acc, tree_out);
          res_valid <= 1'b1;
          acc       <= FP_ZERO;
          cnt       <= '0;
        end else begin
          acc <= fp_add(acc, tree_out);
          cnt <= cnt + CW'(1);
        end
      end
    end
  end
endmodule
