// tb_gemv: self-checking test of gemv (A in tiles by rows, x replayed).
// The testbench plays the interface modules: it streams A tile by tile, x
// once per tile (N/TN times in all) and y once per tile row, each stream with
// its own random gaps, and takes y out with random stalls. Two back-to-back
// calls are run. Results are compared with alpha*A*x + beta*y in double
// precision. The number of beats on each stream is checked against the I/O
// count of the source's model, N*M + M*N/TN + 2N elements.
module tb_gemv;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, TN = 8, TM = 8, TI = 2, TJ = 3;
  localparam int N = TN*TI, M = TM*TJ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha, beta;
  logic [15:0] tiles_n, tiles_m;
  logic x_valid, x_ready, y_valid, y_ready, a_valid, a_ready, out_valid, out_ready;
  fp32_t [W-1:0] x_data, y_data, a_data, out_data;
  fp32_t A [N][M];
  fp32_t x [M], y [N];
  int checks = 0, failures = 0;

  gemv #(.W(W), .TN(TN), .TM(TM)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // element e of beat b of each input stream, in the order the module reads
  function automatic fp32_t a_elem(int b, int w);
    int per_tile = TN*TM/W, t = b / per_tile, r = (b % per_tile) / (TM/W), c = (b % (TM/W))*W + w;
    return A[(t / TJ)*TN + r][(t % TJ)*TM + c];
  endfunction
  function automatic fp32_t x_elem(int b, int w);
    int j = (b / (TM/W)) % TJ;
    return x[j*TM + (b % (TM/W))*W + w];
  endfunction

  task automatic call();
    int ab = 0, xb = 0, yb = 0, ob = 0;
    real want, mag, p;
    foreach (A[i, j]) A[i][j] = rand_fp();
    foreach (x[j]) x[j] = rand_fp();
    foreach (y[i]) y[i] = rand_fp();
    alpha = rand_fp(); beta = rand_fp();
    while (ob < N/W) begin
      a_valid   <= (ab < N*M/W) && ($urandom % 4 != 0);
      x_valid   <= (xb < TI*M/W) && ($urandom % 4 != 0);
      y_valid   <= (yb < N/W) && ($urandom % 4 != 0);
      out_ready <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        a_data[w] <= a_elem(ab < N*M/W ? ab : 0, w);
        x_data[w] <= x_elem(xb, w);
        y_data[w] <= y[((yb < N/W) ? yb : 0)*W + w];
      end
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (x_valid && x_ready) xb++;
      if (y_valid && y_ready) yb++;
      if (out_valid && out_ready) begin
        for (int w = 0; w < W; w++) begin
          int i = ob*W + w;
          want = fp2real(beta) * fp2real(y[i]);
          mag  = (want < 0) ? -want : want;
          for (int j = 0; j < M; j++) begin
            p = fp2real(alpha) * fp2real(A[i][j]) * fp2real(x[j]);
            want += p;
            mag  += (p < 0) ? -p : p;
          end
          checks++;
          if (!close(fp2real(out_data[w]), want, 4.0 * mag)) begin
            failures++;
            $display("y[%0d]: got %f want %f", i, fp2real(out_data[w]), want);
          end
        end
        ob++;
      end
    end
    a_valid <= 0; x_valid <= 0; y_valid <= 0; out_ready <= 0;
    checks++;
    if ((ab + xb + yb + ob)*W != N*M + M*N/TN + 2*N) begin
      failures++;
      $display("I/O count %0d, model %0d", (ab + xb + yb + ob)*W, N*M + M*N/TN + 2*N);
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
