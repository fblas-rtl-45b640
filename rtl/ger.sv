// ger: rank-1 update out = A + alpha * x * y^T, A (N x M) streamed in tiles
// by rows.
//
// The update is a map over A, so the module is a W-lane streaming operator
// whose only state is the vector data for the tile in flight. A arrives as
// TN x TM tiles, tile rows one after another, tiles left to right, row by row
// inside a tile, W elements per beat; the result leaves in the same order,
// which is what lets two ger modules and a gemv_t be chained. For every tile
// row the module takes the TN elements of x, and for every tile the TM
// elements of y (scaled by alpha on entry; y is replayed N/TN times); then
// each beat A[r][c..c+W-1] leaves as A[r][c+i] + x[r] * (alpha*y[c+i]).
// Interface: valid/ready streams of W elements; tiles_m = M/TM held stable
// (the number of tile rows need not be known: the schedule simply repeats). Timing: the output is registered, one beat per cycle,
// one cycle of latency; the register holds while the consumer stalls.
// The tiling order follows the source; the rest is this design's choice.
module ger
  import fblas_pkg::*;
#(
  parameter int W  = 16,
  parameter int TN = 1024,
  parameter int TM = 1024,
  parameter int CW = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  fp32_t           alpha,
  input  logic [CW-1:0]   tiles_m,
  input  logic            x_valid,
  output logic            x_ready,
  input  fp32_t [W-1:0]   x_data,
  input  logic            y_valid,
  output logic            y_ready,
  input  fp32_t [W-1:0]   y_data,
  input  logic            a_valid,
  output logic            a_ready,
  input  fp32_t [W-1:0]   a_data,
  output logic            out_valid,
  input  logic            out_ready,
  output fp32_t [W-1:0]   out_data
);
  localparam int YB = TM / W;
  localparam int XB = TN / W;
  localparam int RW = clog2i(TN) + 1;
  localparam int BW = clog2i(XB > YB ? XB : YB) + 1;

  typedef enum logic [1:0] {S_X, S_Y, S_A} state_t;
  state_t state;

  fp32_t         xbuf [TN];
  fp32_t [W-1:0] ybuf [YB];
  logic [RW-1:0] row;
  logic [BW-1:0] k;
  logic [CW-1:0] bj;
  logic          a_fire;

  assign x_ready = (state == S_X);
  assign y_ready = (state == S_Y);
  assign a_ready = (state == S_A) && (!out_valid || out_ready);
  assign a_fire  = a_valid && a_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_X;
      row       <= '0;
      k         <= '0;
      bj        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (a_fire) out_valid <= 1'b1;
      unique case (state)
        S_X: if (x_valid) begin
          if (k == BW'(XB-1)) begin k <= '0; state <= S_Y; end
          else k <= k + BW'(1);
        end
        S_Y: if (y_valid) begin
          if (k == BW'(YB-1)) begin k <= '0; row <= '0; state <= S_A; end
          else k <= k + BW'(1);
        end
        S_A: if (a_fire) begin
          if (k == BW'(YB-1)) begin
            k <= '0;
            if (row == RW'(TN-1)) begin
              row <= '0;
              if (bj == tiles_m - CW'(1)) begin bj <= '0; state <= S_X; end
              else begin bj <= bj + CW'(1); state <= S_Y; end
            end else row <= row + RW'(1);
          end else k <= k + BW'(1);
        end
        default: state <= S_X;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_X && x_valid)
      for (int w = 0; w < W; w++) xbuf[int'(k)*W + w] <= x_data[w];
    if (state == S_Y && y_valid)
      for (int w = 0; w < W; w++) ybuf[k][w] <= fp_mul(alpha, y_data[w]);
    if (a_fire)
      for (int w = 0; w < W; w++)
        out_data[w] <= fp_add(a_data[w], fp_mul(xbuf[row], ybuf[k][w]));
  end
endmodule
