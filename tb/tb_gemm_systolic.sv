// tb_gemm_systolic: self-checking test of the systolic GEMM.
// The testbench plays the Read A / Read B helpers, sending A and B in the
// tile and k-slab order the array expects, each stream with random gaps, and
// the Store C helper, taking results with random stalls. The first call uses
// small integers, whose products and sums are exact in single precision, so
// the result must match bit for bit; the second uses random reals and a
// tolerance. Both calls cover several memory tiles in both dimensions.
// It also counts how often a k-slab found its next bank still loading (a
// compute stall) and how often a load waited for a busy bank.
module tb_gemm_systolic;
  import fblas_pkg::*;
  import tb_fp_pkg::*;
  localparam int PR = 2, PC = 3, TR = 4, TC = 6, TI = 2, TJ = 2, K = 5;
  localparam int N = TR*TI, M = TC*TJ, DA = TR/PR, DB = TC/PC, E = DA*DB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] tiles_r, tiles_c, k_len;
  logic a_valid, a_ready, b_valid, b_ready, c_valid, c_ready;
  fp32_t [PR-1:0] a_data;
  fp32_t [PC-1:0] b_data;
  fp32_t [PC-1:0] c_data;
  fp32_t A [N][K];
  fp32_t B [K][M];
  int checks = 0, failures = 0, load_waits = 0, comp_stalls = 0;

  gemm_systolic #(.PR(PR), .PC(PC), .TR(TR), .TC(TC)) dut (.*);

  always @(posedge clk) begin
    if (rst_n && a_valid && !a_ready) load_waits++;
    if (rst_n && dut.state == 2'd0 && !dut.step) comp_stalls++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic call(input bit exact);
    int ab = 0, bb = 0, ob = 0;
    int nab = TI*TJ*K*DA, nbb = TI*TJ*K*DB, nob = TI*TJ*E*PR;
    foreach (A[i, k]) A[i][k] = exact ? int_fp(int'($urandom % 9) - 4) : rand_fp();
    foreach (B[k, j]) B[k][j] = exact ? int_fp(int'($urandom % 9) - 4) : rand_fp();
    while (ob < nob) begin
      int t, kk, x;
      a_valid <= (ab < nab) && ($urandom % 3 != 0);
      b_valid <= (bb < nbb) && ($urandom % 3 != 0);
      c_ready <= ($urandom % 4 != 0);
      t = (ab < nab ? ab : 0) / (K*DA); kk = ((ab < nab ? ab : 0) % (K*DA)) / DA; x = (ab < nab ? ab : 0) % DA;
      for (int r = 0; r < PR; r++) a_data[r] <= A[(t / TJ)*TR + x*PR + r][kk];
      t = (bb < nbb ? bb : 0) / (K*DB); kk = ((bb < nbb ? bb : 0) % (K*DB)) / DB; x = (bb < nbb ? bb : 0) % DB;
      for (int c = 0; c < PC; c++) b_data[c] <= B[kk][(t % TJ)*TC + x*PC + c];
      @(posedge clk);
      if (a_valid && a_ready) ab++;
      if (b_valid && b_ready) bb++;
      if (c_valid && c_ready) begin
        int e, r, i, j;
        t = ob / (E*PR); e = (ob % (E*PR)) / PR; r = ob % PR;
        i = (t / TJ)*TR + (e / DB)*PR + r;
        for (int c = 0; c < PC; c++) begin
          real want = 0.0, mag = 0.0, p;
          j = (t % TJ)*TC + (e % DB)*PC + c;
          for (int k = 0; k < K; k++) begin
            p = fp2real(A[i][k]) * fp2real(B[k][j]);
            want += p; mag += (p < 0) ? -p : p;
          end
          checks++;
          if (exact ? (fp2real(c_data[c]) != want) : !close(fp2real(c_data[c]), want, 4.0 * mag)) begin
            failures++;
            $display("C[%0d][%0d]: got %f want %f", i, j, fp2real(c_data[c]), want);
          end
        end
        ob++;
      end
    end
    a_valid <= 0; b_valid <= 0; c_ready <= 0;
  endtask

  initial begin
    a_valid = 0; b_valid = 0; c_ready = 0; a_data = '0; b_data = '0;
    tiles_r = TI; tiles_c = TJ; k_len = K;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    call(1);
    call(0);
    checks++;
    if (load_waits == 0 || comp_stalls == 0) begin
      failures++;
      $display("double buffering not exercised: %0d load waits, %0d compute stalls", load_waits, comp_stalls);
    end
    $display("load waits %0d, compute stalls %0d", load_waits, comp_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
