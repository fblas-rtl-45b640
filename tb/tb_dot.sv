// tb_dot: self-checking test of dot.
// Runs several dot products back to back. The first call has no stalls and
// checks the cycle count of the source's model, C = L_M + log2(W)*L_A + N/W
// (plus the one accumulator cycle counted here as part of N/W's last beat).
// Later calls add random input gaps and output stalls. Results are compared
// with a double-precision sum, with a tolerance scaled by sum |x_i*y_i|.
module tb_dot;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 8, LM = 6, LA = 6, NB = 12, CALLS = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] n_beats;
  logic x_valid, x_ready, y_valid, y_ready, res_valid, res_ready;
  fp32_t [W-1:0] x_data, y_data;
  fp32_t res_data;
  fp32_t xs [CALLS][NB][W], ys [CALLS][NB][W];
  real want [CALLS], mag [CALLS];
  int checks = 0, failures = 0, cyc = 0;
  int t_first_in, t_res;

  dot #(.W(W), .LAT_M(LM), .LAT_A(LA)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xb, yb, rc;
    bit stalls;
    x_valid = 0; y_valid = 0; res_ready = 0; x_data = '0; y_data = '0;
    n_beats = NB;
    for (int c = 0; c < CALLS; c++) begin
      want[c] = 0.0; mag[c] = 0.0;
      for (int b = 0; b < NB; b++)
        for (int w = 0; w < W; w++) begin
          real p;
          xs[c][b][w] = rand_fp();
          ys[c][b][w] = rand_fp();
          p = fp2real(xs[c][b][w]) * fp2real(ys[c][b][w]);
          want[c] += p;
          mag[c]  += (p < 0) ? -p : p;
        end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    xb = 0; yb = 0; rc = 0; t_first_in = -1; t_res = -1;
    while (rc < CALLS) begin
      stalls = (xb >= NB);
      x_valid   <= (xb < CALLS*NB) && (!stalls || ($urandom % 3 != 0));
      y_valid   <= (yb < CALLS*NB) && (!stalls || ($urandom % 3 != 0));
      res_ready <= !stalls || ($urandom % 2 == 0);
      for (int w = 0; w < W; w++) begin
        x_data[w] <= xs[(xb < CALLS*NB ? xb : 0) / NB][(xb < CALLS*NB ? xb : 0) % NB][w];
        y_data[w] <= ys[(yb < CALLS*NB ? yb : 0) / NB][(yb < CALLS*NB ? yb : 0) % NB][w];
      end
      @(posedge clk);
      if (x_valid && x_ready) begin
        if (t_first_in < 0) t_first_in = cyc;
        xb++;
      end
      if (y_valid && y_ready) yb++;
      if (res_valid && res_ready) begin
        if (t_res < 0) t_res = cyc;
        checks++;
        if (!close(fp2real(res_data), want[rc], 4.0 * mag[rc])) begin
          failures++;
          $display("call %0d: got %f want %f", rc, fp2real(res_data), want[rc]);
        end
        rc++;
      end
    end
    checks++;
    if (t_res - t_first_in != LM + 3*LA + NB) begin
      failures++;
      $display("cycle count %0d, model %0d", t_res - t_first_in, LM + 3*LA + NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
