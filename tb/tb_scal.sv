// tb_scal: self-checking test of scal.
// Streams random vectors through the module, first with the consumer always
// ready (to check the latency LAT_M + N/W of the source's model), then with
// random stalls on both sides. Every output element is compared with
// alpha*x computed in double precision from the decoded inputs.
module tb_scal;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, LAT = 6, NB = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha;
  logic x_valid, x_ready, out_valid, out_ready;
  fp32_t [W-1:0] x_data, out_data;
  fp32_t xs [NB][W];
  int checks = 0, failures = 0, cyc = 0;
  int t_first_in, t_first_out, t_last_out;

  scal #(.W(W), .LAT_M(LAT)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit stalls);
    int ib = 0, ob = 0;
    t_first_in = -1; t_first_out = -1;
    foreach (xs[b, w]) xs[b][w] = rand_fp();
    while (ob < NB) begin
      x_valid   <= (ib < NB) && (!stalls || ($urandom % 3 != 0));
      out_ready <= !stalls || ($urandom % 2 == 0);
      for (int w = 0; w < W; w++) x_data[w] <= xs[ib < NB ? ib : 0][w];
      @(posedge clk);
      if (x_valid && x_ready) begin
        if (t_first_in < 0) t_first_in = cyc;
        ib++;
      end
      if (out_valid && out_ready) begin
        if (t_first_out < 0) t_first_out = cyc;
        t_last_out = cyc;
        for (int w = 0; w < W; w++) begin
          checks++;
          if (!close(fp2real(out_data[w]), fp2real(alpha) * fp2real(xs[ob][w]),
                     2.0 * (fp2real(alpha) * fp2real(xs[ob][w]) < 0 ?
                            -fp2real(alpha) * fp2real(xs[ob][w]) : fp2real(alpha) * fp2real(xs[ob][w])))) begin
            failures++;
            $display("mismatch beat %0d lane %0d: %h", ob, w, out_data[w]);
          end
        end
        ob++;
      end
    end
    x_valid <= 0;
  endtask

  initial begin
    x_valid = 0; out_ready = 0; x_data = '0;
    alpha = rand_fp();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run(0);
    checks++;
    if (t_first_out - t_first_in != LAT || t_last_out - t_first_in != LAT + NB - 1) begin
      failures++;
      $display("latency: first %0d last %0d", t_first_out - t_first_in, t_last_out - t_first_in);
    end
    alpha = rand_fp();
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
