// tb_bicg: self-checking test of the BICG composition.
// The testbench is the set of interface modules: it sends A once in tiles
// by rows, p once per tile, r once per tile row, keeps s in a memory array
// that it serves on s_in and updates from s_out (s starts at zero), and
// collects q. Every stream has random gaps or stalls. Checks: q = A p and
// s = A^T r in double precision, A read exactly N*M/W beats (once), and the
// fork stalled A at least once because one of the two modules was behind.
module tb_bicg;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int W = 4, TN = 8, TM = 8, TI = 2, TJ = 3;
  localparam int N = TN*TI, M = TM*TJ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] tiles_n, tiles_m;
  logic a_valid, a_ready, p_valid, p_ready, r_valid, r_ready, s_in_valid, s_in_ready;
  logic q_valid, q_ready, s_valid, s_ready;
  fp32_t [W-1:0] a_data, p_data, r_data, s_in_data, q_data, s_data;
  fp32_t A [N][M];
  fp32_t p [M], r [N], q [N], smem [M];
  int checks = 0, failures = 0, fork_stalls = 0;

  bicg #(.W(W), .TN(TN), .TM(TM), .FIFO_DEPTH(4)) dut (.*);

  always @(posedge clk) if (rst_n && a_valid && !a_ready) fork_stalls++;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t a_elem(int b, int w);
    int per_tile = TN*TM/W, t = b / per_tile, rr = (b % per_tile) / (TM/W), c = (b % (TM/W))*W + w;
    return A[(t / TJ)*TN + rr][(t % TJ)*TM + c];
  endfunction

  initial begin
    int ab = 0, pb = 0, rb = 0, sib = 0, qb = 0, sb = 0;
    a_valid = 0; p_valid = 0; r_valid = 0; s_in_valid = 0; q_ready = 0; s_ready = 0;
    a_data = '0; p_data = '0; r_data = '0; s_in_data = '0;
    tiles_n = TI; tiles_m = TJ;
    foreach (A[i, j]) A[i][j] = rand_fp();
    foreach (p[j]) begin p[j] = rand_fp(); smem[j] = '0; end
    foreach (r[i]) r[i] = rand_fp();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (qb < N/W || sb < TI*M/W) begin
      a_valid    <= (ab < N*M/W) && ($urandom % 5 != 0);
      p_valid    <= (pb < TI*M/W) && ($urandom % 4 != 0);
      r_valid    <= (rb < N/W) && ($urandom % 4 != 0);
      s_in_valid <= (sib < TI*M/W) && ($urandom % 4 != 0);
      q_ready    <= ($urandom % 3 != 0);
      s_ready    <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        a_data[w]    <= a_elem(ab < N*M/W ? ab : 0, w);
        p_data[w]    <= p[(pb % (M/W))*W + w];
        r_data[w]    <= r[((rb < N/W) ? rb : 0)*W + w];
        s_in_data[w] <= smem[(sib % (M/W))*W + w];
      end
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (p_valid && p_ready) pb++;
      if (r_valid && r_ready) rb++;
      if (s_in_valid && s_in_ready) sib++;
      if (q_valid && q_ready) begin
        for (int w = 0; w < W; w++) q[qb*W + w] = q_data[w];
        qb++;
      end
      if (s_valid && s_ready) begin
        for (int w = 0; w < W; w++) smem[(sb % (M/W))*W + w] = s_data[w];
        sb++;
      end
    end
    for (int i = 0; i < N; i++) begin
      real want, mag, t;
      want = 0.0; mag = 0.0;
      for (int j = 0; j < M; j++) begin
        t = fp2real(A[i][j]) * fp2real(p[j]); want += t; mag += (t < 0) ? -t : t;
      end
      checks++;
      if (!close(fp2real(q[i]), want, 4.0 * mag)) begin
        failures++; $display("q[%0d]: got %f want %f", i, fp2real(q[i]), want);
      end
    end
    for (int j = 0; j < M; j++) begin
      real want, mag, t;
      want = 0.0; mag = 0.0;
      for (int i = 0; i < N; i++) begin
        t = fp2real(A[i][j]) * fp2real(r[i]); want += t; mag += (t < 0) ? -t : t;
      end
      checks++;
      if (!close(fp2real(smem[j]), want, 4.0 * mag)) begin
        failures++; $display("s[%0d]: got %f want %f", j, fp2real(smem[j]), want);
      end
    end
    checks++;
    if (ab != N*M/W || fork_stalls == 0) begin
      failures++; $display("A beats %0d, fork stalls %0d", ab, fork_stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
