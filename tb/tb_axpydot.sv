// tb_axpydot: self-checking test of the AXPYDOT composition.
// Four calls back to back; the first runs with no stalls and checks that the
// composed modules overlap: the result appears L_axpy + 1 (channel) + L_dot
// + N/W cycles after the first input, not after three passes over the data.
// Later calls add random gaps on v, w, u and stalls on the result. Each
// result is compared with sum_i (w_i - alpha*v_i)*u_i in double precision.
module tb_axpydot;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, LM = 6, LA = 6, NB = 10, CALLS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fp32_t alpha;
  logic [31:0] n_beats;
  logic v_valid, v_ready, w_valid, w_ready, u_valid, u_ready, res_valid, res_ready;
  fp32_t [W-1:0] v_data, w_data, u_data;
  fp32_t res_data;
  fp32_t vs [CALLS*NB][W], ws [CALLS*NB][W], us [CALLS*NB][W];
  int checks = 0, failures = 0, cyc = 0;

  axpydot #(.W(W), .LAT_M(LM), .LAT_A(LA), .FIFO_DEPTH(4)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vb = 0, wb = 0, ub = 0, rc = 0, t0 = -1, t1 = -1;
    bit st;
    v_valid = 0; w_valid = 0; u_valid = 0; res_ready = 0;
    v_data = '0; w_data = '0; u_data = '0;
    n_beats = NB;
    alpha = rand_fp();
    foreach (vs[b, l]) begin vs[b][l] = rand_fp(); ws[b][l] = rand_fp(); us[b][l] = rand_fp(); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (rc < CALLS) begin
      st = (rc > 0);
      v_valid   <= (vb < CALLS*NB) && (!st || $urandom % 3 != 0);
      w_valid   <= (wb < CALLS*NB) && (!st || $urandom % 3 != 0);
      u_valid   <= (ub < CALLS*NB) && (!st || $urandom % 4 != 0);
      res_ready <= !st || ($urandom % 2 == 0);
      for (int l = 0; l < W; l++) begin
        v_data[l] <= vs[vb < CALLS*NB ? vb : 0][l];
        w_data[l] <= ws[wb < CALLS*NB ? wb : 0][l];
        u_data[l] <= us[ub < CALLS*NB ? ub : 0][l];
      end
      @(posedge clk);
      if (v_valid && v_ready) begin if (t0 < 0) t0 = cyc; vb++; end
      if (w_valid && w_ready) wb++;
      if (u_valid && u_ready) ub++;
      if (res_valid && res_ready) begin
        real want, mag, z, p;
        want = 0.0; mag = 0.0;
        if (t1 < 0) t1 = cyc;
        for (int b = rc*NB; b < (rc+1)*NB; b++)
          for (int l = 0; l < W; l++) begin
            z = fp2real(ws[b][l]) - fp2real(alpha) * fp2real(vs[b][l]);
            p = z * fp2real(us[b][l]);
            want += p;
            mag  += ((p < 0) ? -p : p) + 2.0 * ((fp2real(alpha) * fp2real(vs[b][l]) * fp2real(us[b][l])) < 0 ?
                     -(fp2real(alpha) * fp2real(vs[b][l]) * fp2real(us[b][l])) : (fp2real(alpha) * fp2real(vs[b][l]) * fp2real(us[b][l])));
          end
        checks++;
        if (!close(fp2real(res_data), want, 4.0 * mag)) begin
          failures++;
          $display("call %0d: got %f want %f", rc, fp2real(res_data), want);
        end
        rc++;
      end
    end
    checks++;
    if (t1 - t0 != (LM + LA) + 1 + (LM + 2*LA) + NB) begin
      failures++;
      $display("cycle count %0d, expected %0d", t1 - t0, (LM + LA) + 1 + (LM + 2*LA) + NB);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
