// tb_ger: self-checking test of ger (A + alpha*x*y^T in tiles by rows).
// Streams A, x (once per tile row) and y (once per tile) with random gaps
// and a stalling consumer; each output element, which leaves in A's order,
// is compared with A[i][j] + alpha*x[i]*y[j] in double precision.
module tb_ger;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, TN = 8, TM = 8, TI = 2, TJ = 3;
  localparam int N = TN*TI, M = TM*TJ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha;
  logic [15:0] tiles_m;
  logic x_valid, x_ready, y_valid, y_ready, a_valid, a_ready, out_valid, out_ready;
  fp32_t [W-1:0] x_data, y_data, a_data, out_data;
  fp32_t A [N][M];
  fp32_t x [N], y [M];
  int checks = 0, failures = 0;

  ger #(.W(W), .TN(TN), .TM(TM)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int a_row(int b);
    int per_tile = TN*TM/W, t = b / per_tile;
    return (t / TJ)*TN + (b % per_tile) / (TM/W);
  endfunction
  function automatic int a_col(int b, int w);
    int per_tile = TN*TM/W, t = b / per_tile;
    return (t % TJ)*TM + (b % (TM/W))*W + w;
  endfunction

  task automatic call();
    int ab = 0, xb = 0, yb = 0, ob = 0;
    real want, mag;
    foreach (A[i, j]) A[i][j] = rand_fp();
    foreach (x[i]) x[i] = rand_fp();
    foreach (y[j]) y[j] = rand_fp();
    alpha = rand_fp();
    while (ob < N*M/W) begin
      a_valid   <= (ab < N*M/W) && ($urandom % 4 != 0);
      x_valid   <= (xb < N/W) && ($urandom % 4 != 0);
      y_valid   <= (yb < TI*M/W) && ($urandom % 4 != 0);
      out_ready <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        a_data[w] <= A[a_row(ab < N*M/W ? ab : 0)][a_col(ab < N*M/W ? ab : 0, w)];
        x_data[w] <= x[((xb < N/W) ? xb : 0)*W + w];
        y_data[w] <= y[(yb % (M/W))*W + w];
      end
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (x_valid && x_ready) xb++;
      if (y_valid && y_ready) yb++;
      if (out_valid && out_ready) begin
        for (int w = 0; w < W; w++) begin
          int i = a_row(ob), j = a_col(ob, w);
          real p = fp2real(alpha) * fp2real(x[i]) * fp2real(y[j]);
          want = fp2real(A[i][j]) + p;
          mag  = ((p < 0) ? -p : p) + ((fp2real(A[i][j]) < 0) ? -fp2real(A[i][j]) : fp2real(A[i][j]));
          checks++;
          if (!close(fp2real(out_data[w]), want, 3.0 * mag)) begin
            failures++;
            $display("out[%0d][%0d]: got %f want %f", i, j, fp2real(out_data[w]), want);
          end
        end
        ob++;
      end
    end
    a_valid <= 0; x_valid <= 0; y_valid <= 0; out_ready <= 0;
  endtask

  initial begin
    a_valid = 0; x_valid = 0; y_valid = 0; out_ready = 0;
    a_data = '0; x_data = '0; y_data = '0;
    tiles_m = TJ;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    call();
    call();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
