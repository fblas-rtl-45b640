// tb_gemv_t: self-checking test of gemv_t (A^T x with A in tiles by rows,
// y replayed).
// The testbench plays the interface modules and the off-chip memory that
// holds y: the y blocks the module sends out are written back to a memory
// array and read again on the next tile row, as the replay schedule needs.
// The final contents are compared with alpha*A^T*x + beta*y in double
// precision; the total I/O is checked against N*M + N + 2*M*N/TN.
module tb_gemv_t;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, TN = 8, TM = 8, TI = 3, TJ = 2;
  localparam int N = TN*TI, M = TM*TJ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha, beta;
  logic [15:0] tiles_n, tiles_m;
  logic x_valid, x_ready, y_valid, y_ready, a_valid, a_ready, out_valid, out_ready;
  fp32_t [W-1:0] x_data, y_data, a_data, out_data;
  fp32_t A [N][M];
  fp32_t x [N], y0 [M], ymem [M];
  int checks = 0, failures = 0;

  gemv_t #(.W(W), .TN(TN), .TM(TM)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t a_elem(int b, int w);
    int per_tile = TN*TM/W, t = b / per_tile, r = (b % per_tile) / (TM/W), c = (b % (TM/W))*W + w;
    return A[(t / TJ)*TN + r][(t % TJ)*TM + c];
  endfunction

  task automatic call();
    int ab = 0, xb = 0, yb = 0, ob = 0;
    real want, mag, p;
    foreach (A[i, j]) A[i][j] = rand_fp();
    foreach (x[i]) x[i] = rand_fp();
    foreach (y0[j]) begin y0[j] = rand_fp(); ymem[j] = y0[j]; end
    alpha = rand_fp(); beta = rand_fp();
    while (ob < TI*M/W) begin
      a_valid   <= (ab < N*M/W) && ($urandom % 4 != 0);
      x_valid   <= (xb < N/W) && ($urandom % 4 != 0);
      y_valid   <= (yb < TI*M/W) && ($urandom % 4 != 0);
      out_ready <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        a_data[w] <= a_elem(ab < N*M/W ? ab : 0, w);
        x_data[w] <= x[((xb < N/W) ? xb : 0)*W + w];
        y_data[w] <= ymem[(yb % (M/W))*W + w];
      end
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (x_valid && x_ready) xb++;
      if (y_valid && y_ready) yb++;
      if (out_valid && out_ready) begin
        for (int w = 0; w < W; w++) ymem[(ob % (M/W))*W + w] = out_data[w];
        ob++;
      end
    end
    a_valid <= 0; x_valid <= 0; y_valid <= 0; out_ready <= 0;
    for (int j = 0; j < M; j++) begin
      want = fp2real(beta) * fp2real(y0[j]);
      mag  = (want < 0) ? -want : want;
      for (int i = 0; i < N; i++) begin
        p = fp2real(alpha) * fp2real(A[i][j]) * fp2real(x[i]);
        want += p;
        mag  += (p < 0) ? -p : p;
      end
      checks++;
      if (!close(fp2real(ymem[j]), want, 4.0 * mag)) begin
        failures++;
        $display("y[%0d]: got %f want %f", j, fp2real(ymem[j]), want);
      end
    end
    checks++;
    if ((ab + xb + yb + ob)*W != N*M + N + 2*M*N/TN) begin
      failures++;
      $display("I/O count %0d, model %0d", (ab + xb + yb + ob)*W, N*M + N + 2*M*N/TN);
    end
  endtask

  initial begin
    a_valid = 0; x_valid = 0; y_valid = 0; out_ready = 0;
    a_data = '0; x_data = '0; y_data = '0;
    tiles_n = TI; tiles_m = TJ;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    call();
    call();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
