// tb_gemver: self-checking test of the GEMVER composition.
// Runs component 1 (two chained ger and a gemv_t), storing B and the
// replayed x in memory arrays, then component 2 (gemv on the stored B and
// x). Checks B = A + u1 v1^T + u2 v2^T element by element, x = beta B^T y + z
// and w = alpha B x, all against double-precision references, and that A
// was read once (N*N/W beats). Streams have random gaps and stalls.
module tb_gemver;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, TN = 8, TI = 2;
  localparam int N = TN*TI, NT = TN/W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha, beta;
  logic [15:0] tiles_n;
  logic a_valid, a_ready, u1_valid, u1_ready, v1_valid, v1_ready, u2_valid, u2_ready;
  logic v2_valid, v2_ready, y_valid, y_ready, x_in_valid, x_in_ready;
  logic b_valid, b_ready, x_valid, x_ready, b2_valid, b2_ready, x2_valid, x2_ready, w_valid, w_ready;
  fp32_t [W-1:0] a_data, u1_data, v1_data, u2_data, v2_data, y_data, x_in_data;
  fp32_t [W-1:0] b_data, x_data, b2_data, x2_data, w_data;
  fp32_t A [N][N], Bm [N][N];
  fp32_t u1 [N], v1 [N], u2 [N], v2 [N], y [N], z [N], xmem [N], wv [N];
  real   Br [N][N], xr [N];
  int checks = 0, failures = 0;

  gemver #(.W(W), .TN(TN), .FIFO_DEPTH(4)) dut (.*);

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tile-order beat b of an N x N matrix: row and first column
  function automatic int t_row(int b);
    int per_tile = TN*TN/W, t = b / per_tile;
    return (t / TI)*TN + (b % per_tile) / NT;
  endfunction
  function automatic int t_col(int b);
    int per_tile = TN*TN/W, t = b / per_tile;
    return (t % TI)*TN + (b % NT)*W;
  endfunction

  initial begin
    int ab = 0, u1b = 0, v1b = 0, u2b = 0, v2b = 0, yb = 0, xib = 0, bb = 0, xb = 0;
    int b2b = 0, x2b = 0, wb = 0;
    real want, mag, t;
    a_valid = 0; u1_valid = 0; v1_valid = 0; u2_valid = 0; v2_valid = 0; y_valid = 0;
    x_in_valid = 0; b_ready = 0; x_ready = 0; b2_valid = 0; x2_valid = 0; w_ready = 0;
    a_data = '0; u1_data = '0; v1_data = '0; u2_data = '0; v2_data = '0; y_data = '0;
    x_in_data = '0; b2_data = '0; x2_data = '0;
    tiles_n = TI;
    alpha = rand_fp(); beta = rand_fp();
    foreach (A[i, j]) A[i][j] = rand_fp();
    for (int i = 0; i < N; i++) begin
      u1[i] = rand_fp(); v1[i] = rand_fp(); u2[i] = rand_fp(); v2[i] = rand_fp();
      y[i] = rand_fp(); z[i] = rand_fp(); xmem[i] = z[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // component 1
    while (bb < N*N/W || xb < TI*N/W) begin
      a_valid    <= (ab < N*N/W) && ($urandom % 5 != 0);
      u1_valid   <= (u1b < N/W) && ($urandom % 4 != 0);
      u2_valid   <= (u2b < N/W) && ($urandom % 4 != 0);
      v1_valid   <= (v1b < TI*N/W) && ($urandom % 4 != 0);
      v2_valid   <= (v2b < TI*N/W) && ($urandom % 4 != 0);
      y_valid    <= (yb < N/W) && ($urandom % 4 != 0);
      x_in_valid <= (xib < TI*N/W) && ($urandom % 4 != 0);
      b_ready    <= ($urandom % 3 != 0);
      x_ready    <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        a_data[w]    <= A[t_row(ab < N*N/W ? ab : 0)][t_col(ab < N*N/W ? ab : 0) + w];
        u1_data[w]   <= u1[((u1b < N/W) ? u1b : 0)*W + w];
        u2_data[w]   <= u2[((u2b < N/W) ? u2b : 0)*W + w];
        v1_data[w]   <= v1[(v1b % (N/W))*W + w];
        v2_data[w]   <= v2[(v2b % (N/W))*W + w];
        y_data[w]    <= y[((yb < N/W) ? yb : 0)*W + w];
        x_in_data[w] <= xmem[(xib % (N/W))*W + w];
      end
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (u1_valid && u1_ready) u1b++;
      if (u2_valid && u2_ready) u2b++;
      if (v1_valid && v1_ready) v1b++;
      if (v2_valid && v2_ready) v2b++;
      if (y_valid && y_ready) yb++;
      if (x_in_valid && x_in_ready) xib++;
      if (b_valid && b_ready) begin
        for (int w = 0; w < W; w++) Bm[t_row(bb)][t_col(bb) + w] = b_data[w];
        bb++;
      end
      if (x_valid && x_ready) begin
        for (int w = 0; w < W; w++) xmem[(xb % (N/W))*W + w] = x_data[w];
        xb++;
      end
    end
    a_valid <= 0; u1_valid <= 0; u2_valid <= 0; v1_valid <= 0; v2_valid <= 0;
    y_valid <= 0; x_in_valid <= 0; b_ready <= 0; x_ready <= 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        Br[i][j] = fp2real(A[i][j]) + fp2real(u1[i]) * fp2real(v1[j]) + fp2real(u2[i]) * fp2real(v2[j]);
        mag = ((fp2real(A[i][j]) < 0) ? -fp2real(A[i][j]) : fp2real(A[i][j])) + 32.0;
        checks++;
        if (!close(fp2real(Bm[i][j]), Br[i][j], 4.0 * mag)) begin
          failures++; $display("B[%0d][%0d]: got %f want %f", i, j, fp2real(Bm[i][j]), Br[i][j]);
        end
      end
    for (int j = 0; j < N; j++) begin
      want = fp2real(z[j]); mag = (want < 0) ? -want : want;
      for (int i = 0; i < N; i++) begin
        t = fp2real(beta) * Br[i][j] * fp2real(y[i]); want += t; mag += (t < 0) ? -t : t;
      end
      xr[j] = want;
      checks++;
      if (!close(fp2real(xmem[j]), want, 8.0 * mag)) begin
        failures++; $display("x[%0d]: got %f want %f", j, fp2real(xmem[j]), want);
      end
    end
    checks++;
    if (ab != N*N/W) begin failures++; $display("A read %0d beats", ab); end
    // component 2: w = alpha * B * x on the stored B and x
    while (wb < N/W) begin
      b2_valid <= (b2b < N*N/W) && ($urandom % 5 != 0);
      x2_valid <= (x2b < TI*N/W) && ($urandom % 4 != 0);
      w_ready  <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        b2_data[w] <= Bm[t_row(b2b < N*N/W ? b2b : 0)][t_col(b2b < N*N/W ? b2b : 0) + w];
        x2_data[w] <= xmem[(x2b % (N/W))*W + w];
      end
      @(posedge clk);
      if (b2_valid && b2_ready) b2b++;
      if (x2_valid && x2_ready) x2b++;
      if (w_valid && w_ready) begin
        for (int w = 0; w < W; w++) wv[wb*W + w] = w_data[w];
        wb++;
      end
    end
    for (int i = 0; i < N; i++) begin
      want = 0.0; mag = 0.0;
      for (int j = 0; j < N; j++) begin
        t = fp2real(alpha) * Br[i][j] * xr[j]; want += t; mag += (t < 0) ? -t : t;
      end
      checks++;
      if (!close(fp2real(wv[i]), want, 64.0 * mag)) begin
        failures++; $display("w[%0d]: got %f want %f", i, fp2real(wv[i]), want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
