// tb_axpy: self-checking test of axpy.
// Drives x and y independently with random gaps and a randomly stalling
// consumer, and compares every output element with alpha*x+y computed in
// double precision. A first pass with no stalls checks the latency
// LAT_M + LAT_A and one beat per cycle.
module tb_axpy;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, LM = 6, LA = 6, NB = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha;
  logic x_valid, x_ready, y_valid, y_ready, out_valid, out_ready;
  fp32_t [W-1:0] x_data, y_data, out_data;
  fp32_t xs [NB][W], ys [NB][W];
  int checks = 0, failures = 0, cyc = 0;
  int t_first_in, t_first_out, t_last_out;

  axpy #(.W(W), .LAT_M(LM), .LAT_A(LA)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit stalls);
    int xb = 0, yb = 0, ob = 0;
    real want, mag;
    t_first_in = -1; t_first_out = -1;
    foreach (xs[b, w]) begin xs[b][w] = rand_fp(); ys[b][w] = rand_fp(); end
    while (ob < NB) begin
      x_valid   <= (xb < NB) && (!stalls || ($urandom % 3 != 0));
      y_valid   <= (yb < NB) && (!stalls || ($urandom % 3 != 0));
      out_ready <= !stalls || ($urandom % 2 == 0);
      for (int w = 0; w < W; w++) begin
        x_data[w] <= xs[xb < NB ? xb : 0][w];
        y_data[w] <= ys[yb < NB ? yb : 0][w];
      end
      @(posedge clk);
      if (x_valid && x_ready) begin
        if (t_first_in < 0) t_first_in = cyc;
        xb++;
      end
      if (y_valid && y_ready) yb++;
      if (xb != yb) begin failures++; $display("x and y taken apart"); end
      if (out_valid && out_ready) begin
        if (t_first_out < 0) t_first_out = cyc;
        t_last_out = cyc;
        for (int w = 0; w < W; w++) begin
          want = fp2real(alpha) * fp2real(xs[ob][w]) + fp2real(ys[ob][w]);
          mag  = fp2real(alpha) * fp2real(xs[ob][w]);
          mag  = (mag < 0 ? -mag : mag) + (fp2real(ys[ob][w]) < 0 ? -fp2real(ys[ob][w]) : fp2real(ys[ob][w]));
          checks++;
          if (!close(fp2real(out_data[w]), want, 2.0 * mag)) begin
            failures++;
            $display("mismatch beat %0d lane %0d: got %f want %f", ob, w, fp2real(out_data[w]), want);
          end
        end
        ob++;
      end
    end
    x_valid <= 0; y_valid <= 0;
  endtask

  initial begin
    x_valid = 0; y_valid = 0; out_ready = 0; x_data = '0; y_data = '0;
    alpha = rand_fp();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run(0);
    checks++;
    if (t_first_out - t_first_in != LM + LA || t_last_out - t_first_in != LM + LA + NB - 1) begin
      failures++;
      $display("latency: first %0d last %0d", t_first_out - t_first_in, t_last_out - t_first_in);
    end
    alpha = rand_fp();
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
