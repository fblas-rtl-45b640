// gemv_t: y = alpha * A^T * x + beta * y, A (N x M) received in tiles by rows.
//
// This is the transposed routine on the same matrix order as gemv, so that
// both can share one stream of A. A arrives as TN x TM tiles, tile rows one
// after another, tiles left to right, row by row inside a tile, W elements per
// beat. x has N elements, y has M. For every tile row the module
//   1. takes the TN elements of x for that tile row and keeps alpha*x,
//   2. for each tile: takes the TM elements of y for the tile's columns,
//      scaled by beta on the first tile row only (later tile rows receive the
//      partial results sent out before), then the tile: a beat holding
//      A[r][c..c+W-1] adds alpha*x[r]*A[r][c+i] to y[c+i] in W parallel
//      lanes, and finally sends the TM updated elements of y.
// y is thus replayed: it is sent out and read back N/TN times, and only the
// last pass holds the result. I/O is N*M + N + 2*M*N/TN elements.
// Interface and timing as gemv: valid/ready streams of W elements, tiles_n =
// N/TN and tiles_m = M/TM held stable, one beat per cycle, phases in
// sequence. The replay schedule follows the source's description of tiling;
// the per-phase sequencing is this design's choice.
module gemv_t
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
  input  fp32_t           beta,
  input  logic [CW-1:0]   tiles_n,
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
  localparam int YB = TM / W;   // beats per y block and per tile row segment
  localparam int XB = TN / W;   // beats per x block
  localparam int RW = clog2i(TN) + 1;
  localparam int BW = clog2i(XB > YB ? XB : YB) + 1;

  typedef enum logic [1:0] {S_X, S_Y, S_A, S_OUT} state_t;
  state_t state;

  fp32_t         xbuf [TN];
  fp32_t [W-1:0] ybuf [YB];
  logic [RW-1:0] row;
  logic [BW-1:0] k;
  logic [CW-1:0] bi, bj;

  assign x_ready   = (state == S_X);
  assign y_ready   = (state == S_Y);
  assign a_ready   = (state == S_A);
  assign out_valid = (state == S_OUT);
  assign out_data  = ybuf[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_X;
      row   <= '0;
      k     <= '0;
      bi    <= '0;
      bj    <= '0;
    end else begin
      unique case (state)
        S_X: if (x_valid) begin
          if (k == BW'(XB-1)) begin k <= '0; state <= S_Y; end
          else k <= k + BW'(1);
        end
        S_Y: if (y_valid) begin
          if (k == BW'(YB-1)) begin k <= '0; row <= '0; state <= S_A; end
          else k <= k + BW'(1);
        end
        S_A: if (a_valid) begin
          if (k == BW'(YB-1)) begin
            k <= '0;
            if (row == RW'(TN-1)) begin row <= '0; state <= S_OUT; end
            else row <= row + RW'(1);
          end else k <= k + BW'(1);
        end
        S_OUT: if (out_ready) begin
          if (k == BW'(YB-1)) begin
            k <= '0;
            if (bj == tiles_m - CW'(1)) begin
              bj    <= '0;
              bi    <= (bi == tiles_n - CW'(1)) ? '0 : bi + CW'(1);
              state <= S_X;
            end else begin
              bj    <= bj + CW'(1);
              state <= S_Y;
            end
          end else k <= k + BW'(1);
        end
        default: state <= S_X;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_X && x_valid)
      for (int w = 0; w < W; w++) xbuf[int'(k)*W + w] <= fp_mul(alpha, x_data[w]);
    if (state == S_Y && y_valid)
      for (int w = 0; w < W; w++)
        ybuf[k][w] <= (bi == '0) ? fp_mul(beta, y_data[w]) : y_data[w];
    if (state == S_A && a_valid)
      for (int w = 0; w < W; w++)
        ybuf[k][w] <= fp_add(ybuf[k][w], fp_mul(xbuf[row], a_data[w]));
  end
endmodule
