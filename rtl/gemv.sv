// gemv: y = alpha * A * x + beta * y, A (N x M) received in tiles by rows.
//
// Schedule (the "tiles by rows" variant of the source): the matrix arrives as
// a grid of TN x TM tiles, tile rows one after another, the tiles of a tile
// row left to right, and inside a tile row by row, W elements per beat.
// For every tile row the module
//   1. takes the TN matching elements of y and keeps beta*y in ybuf,
//   2. for each tile: takes the TM elements of x for that tile's columns
//      (x is replayed, N/TN times in all), then the TN*TM/W beats of the
//      tile; each beat goes through a W-lane dot-product tree and is summed
//      into a row accumulator; at the end of a row inside the tile,
//      ybuf[row] += alpha * accumulator,
//   3. after the last tile of the tile row, sends the TN results.
// I/O per call is N*M + M*N/TN + 2N elements, as in the source.
// Interface: valid/ready streams of W elements (x, y, A, out); tiles_n =
// N/TN and tiles_m = M/TM are held stable during a call, so N and M must be
// multiples of the tile sizes. Timing: one beat per cycle in every phase; a
// call takes about N*M/W + N*M/(TN*W) + 2N/W cycles. The arithmetic is
// combinational within a cycle; phases run one after another (no overlap of
// loading and computing), which is this design's simplification.
module gemv
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
  localparam int XB = TM / W;   // beats per tile row segment / x block
  localparam int YB = TN / W;   // beats per y block
  localparam int RW = clog2i(TN) + 1;
  localparam int BW = clog2i(XB > YB ? XB : YB) + 1;

  typedef enum logic [1:0] {S_Y, S_X, S_A, S_OUT} state_t;
  state_t state;

  fp32_t         ybuf [TN];
  fp32_t [W-1:0] xbuf [XB];
  fp32_t         racc, dotv;
  logic [RW-1:0] row;
  logic [BW-1:0] k;
  logic [CW-1:0] bi, bj;

  fp_dot_tree #(.W(W)) u_tree (.a (a_data), .b (xbuf[k]), .sum (dotv));

  assign y_ready   = (state == S_Y);
  assign x_ready   = (state == S_X);
  assign a_ready   = (state == S_A);
  assign out_valid = (state == S_OUT);
  always_comb begin
    for (int w = 0; w < W; w++) out_data[w] = ybuf[int'(k)*W + w];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_Y;
      row   <= '0;
      k     <= '0;
      bi    <= '0;
      bj    <= '0;
      racc  <= FP_ZERO;
    end else begin
      unique case (state)
        S_Y: if (y_valid) begin
          if (k == BW'(YB-1)) begin k <= '0; state <= S_X; end
          else k <= k + BW'(1);
        end
        S_X: if (x_valid) begin
          if (k == BW'(XB-1)) begin k <= '0; row <= '0; state <= S_A; end
          else k <= k + BW'(1);
        end
        S_A: if (a_valid) begin
          if (k == BW'(XB-1)) begin
            k    <= '0;
            racc <= FP_ZERO;
            if (row == RW'(TN-1)) begin
              row <= '0;
              if (bj == tiles_m - CW'(1)) begin bj <= '0; state <= S_OUT; end
              else begin bj <= bj + CW'(1); state <= S_X; end
            end else row <= row + RW'(1);
          end else begin
            k    <= k + BW'(1);
            racc <= fp_add(racc, dotv);
          end
        end
        S_OUT: if (out_ready) begin
          if (k == BW'(YB-1)) begin
            k     <= '0;
            state <= S_Y;
            bi    <= (bi == tiles_n - CW'(1)) ? '0 : bi + CW'(1);
          end else k <= k + BW'(1);
        end
        default: state <= S_Y;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_Y && y_valid)
      for (int w = 0; w < W; w++) ybuf[int'(k)*W + w] <= fp_mul(beta, y_data[w]);
    if (state == S_X && x_valid) xbuf[k] <= x_data;
    if (state == S_A && a_valid && k == BW'(XB-1))
      ybuf[row] <= fp_add(ybuf[row], fp_mul(alpha, fp_add(racc, dotv)));
  end
endmodule
