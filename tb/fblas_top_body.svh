// Shared body of the fblas_top testbenches (included inside a testbench
// module that has defined the localparams W, TN, TM, PR, PC, TR, TC, the
// problem sizes SC_NB, AD_NB, AD_CALLS, BI_TI, BI_TJ, GV_TI, GM_TI, GM_TJ,
// GM_K, the flag CHECK_MECH and WD_CYCLES, instantiated fblas_top as dut,
// and provided the task finish_run that prints the result line and ends).
// Five threads run at the same time, one per accelerator, each acting as the
// interface modules and memory of its kernel and checking the results
// against double-precision references. Mechanism counters record stream
// back-pressure, a full channel, the BICG fork stall, vector replay, the
// GEMM double-buffer waits and drain, and the GEMVER component switch.

  import fblas_pkg::*;
  import tb_fp_pkg::*;

  localparam int BN = TN*BI_TI, BM = TM*BI_TJ;     // BICG matrix
  localparam int GN = TN*GV_TI;                    // GEMVER matrix
  localparam int MN = TR*GM_TI, MM = TC*GM_TJ;     // GEMM C
  localparam int DA = TR/PR, DB = TC/PC, E = DA*DB;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // scalars
  fp32_t scal_alpha, axpydot_alpha, gemver_alpha, gemver_beta;
  logic [31:0] axpydot_n_beats;
  logic [15:0] bicg_tiles_n, bicg_tiles_m, gemver_tiles_n, gemm_tiles_r, gemm_tiles_c, gemm_k_len;
  // streams
  logic scal_x_valid, scal_x_ready, scal_out_valid, scal_out_ready;
  fp32_t [W-1:0] scal_x_data, scal_out_data;
  logic axpydot_v_valid, axpydot_v_ready, axpydot_w_valid, axpydot_w_ready;
  logic axpydot_u_valid, axpydot_u_ready, axpydot_res_valid, axpydot_res_ready;
  fp32_t [W-1:0] axpydot_v_data, axpydot_w_data, axpydot_u_data;
  fp32_t axpydot_res_data;
  logic bicg_a_valid, bicg_a_ready, bicg_p_valid, bicg_p_ready, bicg_r_valid, bicg_r_ready;
  logic bicg_s_in_valid, bicg_s_in_ready, bicg_q_valid, bicg_q_ready, bicg_s_valid, bicg_s_ready;
  fp32_t [W-1:0] bicg_a_data, bicg_p_data, bicg_r_data, bicg_s_in_data, bicg_q_data, bicg_s_data;
  logic gemver_a_valid, gemver_a_ready, gemver_u1_valid, gemver_u1_ready, gemver_v1_valid, gemver_v1_ready;
  logic gemver_u2_valid, gemver_u2_ready, gemver_v2_valid, gemver_v2_ready, gemver_y_valid, gemver_y_ready;
  logic gemver_x_in_valid, gemver_x_in_ready, gemver_b_valid, gemver_b_ready, gemver_x_valid, gemver_x_ready;
  logic gemver_b2_valid, gemver_b2_ready, gemver_x2_valid, gemver_x2_ready, gemver_w_valid, gemver_w_ready;
  fp32_t [W-1:0] gemver_a_data, gemver_u1_data, gemver_v1_data, gemver_u2_data, gemver_v2_data;
  fp32_t [W-1:0] gemver_y_data, gemver_x_in_data, gemver_b_data, gemver_x_data;
  fp32_t [W-1:0] gemver_b2_data, gemver_x2_data, gemver_w_data;
  logic gemm_a_valid, gemm_a_ready, gemm_b_valid, gemm_b_ready, gemm_c_valid, gemm_c_ready;
  fp32_t [PR-1:0] gemm_a_data;
  fp32_t [PC-1:0] gemm_b_data, gemm_c_data;

  // data
  fp32_t sc_x [SC_NB][W];
  fp32_t ad_v [AD_CALLS*AD_NB][W], ad_w [AD_CALLS*AD_NB][W], ad_u [AD_CALLS*AD_NB][W];
  fp32_t bA [BN][BM];
  fp32_t bp [BM], br [BN], bq [BN], bs [BM];
  fp32_t gA [GN][GN], gB [GN][GN];
  fp32_t gu1 [GN], gv1 [GN], gu2 [GN], gv2 [GN], gy [GN], gz [GN], gx [GN], gw [GN];
  real   gBr [GN][GN], gxr [GN];
  fp32_t mA [MN][GM_K], mB [GM_K][MM];

  // mechanism counters
  int n_backpressure = 0, n_channel_full = 0, n_fork_stall = 0, n_x_replay = 0, n_y_replay = 0;
  int n_load_wait = 0, n_compute_wait = 0, n_drain = 0, n_component_switch = 0;
  always @(posedge clk) if (rst_n) begin
    if ((scal_out_valid && !scal_out_ready) || (bicg_q_valid && !bicg_q_ready) ||
        (gemm_c_valid && !gemm_c_ready) || (gemver_b_valid && !gemver_b_ready)) n_backpressure++;
    if (!dut.u_axpydot.u_ch_z.in_ready) n_channel_full++;
    if (bicg_a_valid && !bicg_a_ready) n_fork_stall++;
    if (gemm_a_valid && !gemm_a_ready) n_load_wait++;
    if (dut.u_gemm.state == 2'd0 && !dut.u_gemm.step) n_compute_wait++;
    if (gemm_c_valid && gemm_c_ready) n_drain++;
  end


  task automatic fail(input string what);
    failures++;
    $display("FAIL %s", what);
  endtask

  function automatic real fabs(input real v);
    return (v < 0) ? -v : v;
  endfunction

  // ------------------------------------------------------------------ SCAL
  task automatic run_scal();
    int ib = 0, ob = 0;
    scal_alpha = rand_fp();
    foreach (sc_x[b, l]) sc_x[b][l] = rand_fp();
    while (ob < SC_NB) begin
      scal_x_valid   <= (ib < SC_NB) && ($urandom % 4 != 0);
      scal_out_ready <= ($urandom % 3 != 0);
      for (int l = 0; l < W; l++) scal_x_data[l] <= sc_x[ib < SC_NB ? ib : 0][l];
      @(posedge clk);
      if (scal_x_valid && scal_x_ready) ib++;
      if (scal_out_valid && scal_out_ready) begin
        for (int l = 0; l < W; l++) begin
          real want = fp2real(scal_alpha) * fp2real(sc_x[ob][l]);
          checks++;
          if (!close(fp2real(scal_out_data[l]), want, 2.0 * fabs(want))) fail("scal");
        end
        ob++;
      end
    end
    scal_x_valid <= 0; scal_out_ready <= 0;
  endtask

  // --------------------------------------------------------------- AXPYDOT
  task automatic run_axpydot();
    int vb = 0, wb = 0, ub = 0, rc = 0, nb = AD_CALLS*AD_NB;
    axpydot_alpha = rand_fp();
    axpydot_n_beats = AD_NB;
    foreach (ad_v[b, l]) begin ad_v[b][l] = rand_fp(); ad_w[b][l] = rand_fp(); ad_u[b][l] = rand_fp(); end
    while (rc < AD_CALLS) begin
      axpydot_v_valid   <= (vb < nb) && ($urandom % 4 != 0);
      axpydot_w_valid   <= (wb < nb) && ($urandom % 4 != 0);
      axpydot_u_valid   <= (ub < nb) && ($urandom % 3 == 0);
      axpydot_res_ready <= ($urandom % 2 == 0);
      for (int l = 0; l < W; l++) begin
        axpydot_v_data[l] <= ad_v[vb < nb ? vb : 0][l];
        axpydot_w_data[l] <= ad_w[wb < nb ? wb : 0][l];
        axpydot_u_data[l] <= ad_u[ub < nb ? ub : 0][l];
      end
      @(posedge clk);
      if (axpydot_v_valid && axpydot_v_ready) vb++;
      if (axpydot_w_valid && axpydot_w_ready) wb++;
      if (axpydot_u_valid && axpydot_u_ready) ub++;
      if (axpydot_res_valid && axpydot_res_ready) begin
        real want = 0.0, mag = 0.0, z, av;
        for (int b = rc*AD_NB; b < (rc+1)*AD_NB; b++)
          for (int l = 0; l < W; l++) begin
            av = fp2real(axpydot_alpha) * fp2real(ad_v[b][l]);
            z = fp2real(ad_w[b][l]) - av;
            want += z * fp2real(ad_u[b][l]);
            mag  += fabs(z * fp2real(ad_u[b][l])) + 2.0 * fabs(av * fp2real(ad_u[b][l]));
          end
        checks++;
        if (!close(fp2real(axpydot_res_data), want, 4.0 * mag)) fail("axpydot");
        rc++;
      end
    end
    axpydot_v_valid <= 0; axpydot_w_valid <= 0; axpydot_u_valid <= 0; axpydot_res_ready <= 0;
  endtask

  // ------------------------------------------------------------------ BICG
  function automatic fp32_t bicg_a(int b, int w);
    int per_tile = TN*TM/W, t = b / per_tile, rr = (b % per_tile) / (TM/W);
    return bA[(t / BI_TJ)*TN + rr][(t % BI_TJ)*TM + (b % (TM/W))*W + w];
  endfunction

  task automatic run_bicg();
    int ab = 0, pb = 0, rb = 0, sib = 0, qb = 0, sb = 0;
    int na = BN*BM/W, np = BI_TI*BM/W;
    bicg_tiles_n = BI_TI; bicg_tiles_m = BI_TJ;
    foreach (bA[i, j]) bA[i][j] = rand_fp();
    foreach (bp[j]) begin bp[j] = rand_fp(); bs[j] = '0; end
    foreach (br[i]) br[i] = rand_fp();
    while (qb < BN/W || sb < np) begin
      bicg_a_valid    <= (ab < na) && ($urandom % 5 != 0);
      bicg_p_valid    <= (pb < np) && ($urandom % 4 != 0);
      bicg_r_valid    <= (rb < BN/W) && ($urandom % 4 != 0);
      bicg_s_in_valid <= (sib < np) && ($urandom % 4 != 0);
      bicg_q_ready    <= ($urandom % 3 != 0);
      bicg_s_ready    <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        bicg_a_data[w]    <= bicg_a(ab < na ? ab : 0, w);
        bicg_p_data[w]    <= bp[(pb % (BM/W))*W + w];
        bicg_r_data[w]    <= br[((rb < BN/W) ? rb : 0)*W + w];
        bicg_s_in_data[w] <= bs[(sib % (BM/W))*W + w];
      end
      @(posedge clk);
      if (bicg_a_valid && bicg_a_ready) ab++;
      if (bicg_p_valid && bicg_p_ready) begin pb++; if (pb > BM/W) n_x_replay++; end
      if (bicg_r_valid && bicg_r_ready) rb++;
      if (bicg_s_in_valid && bicg_s_in_ready) begin sib++; if (sib > BM/W) n_y_replay++; end
      if (bicg_q_valid && bicg_q_ready) begin
        for (int w = 0; w < W; w++) bq[qb*W + w] = bicg_q_data[w];
        qb++;
      end
      if (bicg_s_valid && bicg_s_ready) begin
        for (int w = 0; w < W; w++) bs[(sb % (BM/W))*W + w] = bicg_s_data[w];
        sb++;
      end
    end
    bicg_a_valid <= 0; bicg_p_valid <= 0; bicg_r_valid <= 0; bicg_s_in_valid <= 0;
    bicg_q_ready <= 0; bicg_s_ready <= 0;
    checks++;
    if (ab != na) fail("bicg read A more than once");
    for (int i = 0; i < BN; i++) begin
      real want = 0.0, mag = 0.0, t;
      for (int j = 0; j < BM; j++) begin
        t = fp2real(bA[i][j]) * fp2real(bp[j]); want += t; mag += fabs(t);
      end
      checks++;
      if (!close(fp2real(bq[i]), want, 4.0 * mag)) fail("bicg q");
    end
    for (int j = 0; j < BM; j++) begin
      real want = 0.0, mag = 0.0, t;
      for (int i = 0; i < BN; i++) begin
        t = fp2real(bA[i][j]) * fp2real(br[i]); want += t; mag += fabs(t);
      end
      checks++;
      if (!close(fp2real(bs[j]), want, 4.0 * mag)) fail("bicg s");
    end
  endtask

  // ---------------------------------------------------------------- GEMVER
  localparam int GT = TN/W;
  function automatic int g_row(int b);
    int per_tile = TN*TN/W, t = b / per_tile;
    return (t / GV_TI)*TN + (b % per_tile) / GT;
  endfunction
  function automatic int g_col(int b);
    int per_tile = TN*TN/W, t = b / per_tile;
    return (t % GV_TI)*TN + (b % GT)*W;
  endfunction

  task automatic run_gemver();
    int ab = 0, u1b = 0, v1b = 0, u2b = 0, v2b = 0, yb = 0, xib = 0, bb = 0, xb = 0;
    int b2b = 0, x2b = 0, wb = 0, na = GN*GN/W, nv = GV_TI*GN/W;
    real want, mag, t;
    gemver_tiles_n = GV_TI;
    gemver_alpha = rand_fp(); gemver_beta = rand_fp();
    foreach (gA[i, j]) gA[i][j] = rand_fp();
    for (int i = 0; i < GN; i++) begin
      gu1[i] = rand_fp(); gv1[i] = rand_fp(); gu2[i] = rand_fp(); gv2[i] = rand_fp();
      gy[i] = rand_fp(); gz[i] = rand_fp(); gx[i] = gz[i];
    end
    while (bb < na || xb < nv) begin
      gemver_a_valid    <= (ab < na) && ($urandom % 5 != 0);
      gemver_u1_valid   <= (u1b < GN/W) && ($urandom % 4 != 0);
      gemver_u2_valid   <= (u2b < GN/W) && ($urandom % 4 != 0);
      gemver_v1_valid   <= (v1b < nv) && ($urandom % 4 != 0);
      gemver_v2_valid   <= (v2b < nv) && ($urandom % 4 != 0);
      gemver_y_valid    <= (yb < GN/W) && ($urandom % 4 != 0);
      gemver_x_in_valid <= (xib < nv) && ($urandom % 4 != 0);
      gemver_b_ready    <= ($urandom % 3 != 0);
      gemver_x_ready    <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        gemver_a_data[w]    <= gA[g_row(ab < na ? ab : 0)][g_col(ab < na ? ab : 0) + w];
        gemver_u1_data[w]   <= gu1[((u1b < GN/W) ? u1b : 0)*W + w];
        gemver_u2_data[w]   <= gu2[((u2b < GN/W) ? u2b : 0)*W + w];
        gemver_v1_data[w]   <= gv1[(v1b % (GN/W))*W + w];
        gemver_v2_data[w]   <= gv2[(v2b % (GN/W))*W + w];
        gemver_y_data[w]    <= gy[((yb < GN/W) ? yb : 0)*W + w];
        gemver_x_in_data[w] <= gx[(xib % (GN/W))*W + w];
      end
      @(posedge clk);
      if (gemver_a_valid && gemver_a_ready) ab++;
      if (gemver_u1_valid && gemver_u1_ready) u1b++;
      if (gemver_u2_valid && gemver_u2_ready) u2b++;
      if (gemver_v1_valid && gemver_v1_ready) v1b++;
      if (gemver_v2_valid && gemver_v2_ready) v2b++;
      if (gemver_y_valid && gemver_y_ready) yb++;
      if (gemver_x_in_valid && gemver_x_in_ready) begin xib++; if (xib > GN/W) n_y_replay++; end
      if (gemver_b_valid && gemver_b_ready) begin
        for (int w = 0; w < W; w++) gB[g_row(bb)][g_col(bb) + w] = gemver_b_data[w];
        bb++;
      end
      if (gemver_x_valid && gemver_x_ready) begin
        for (int w = 0; w < W; w++) gx[(xb % (GN/W))*W + w] = gemver_x_data[w];
        xb++;
      end
    end
    gemver_a_valid <= 0; gemver_u1_valid <= 0; gemver_u2_valid <= 0; gemver_v1_valid <= 0;
    gemver_v2_valid <= 0; gemver_y_valid <= 0; gemver_x_in_valid <= 0;
    gemver_b_ready <= 0; gemver_x_ready <= 0;
    for (int i = 0; i < GN; i++)
      for (int j = 0; j < GN; j++) begin
        gBr[i][j] = fp2real(gA[i][j]) + fp2real(gu1[i]) * fp2real(gv1[j]) + fp2real(gu2[i]) * fp2real(gv2[j]);
        checks++;
        if (!close(fp2real(gB[i][j]), gBr[i][j], 4.0 * (fabs(fp2real(gA[i][j])) + 32.0))) fail("gemver B");
      end
    for (int j = 0; j < GN; j++) begin
      want = fp2real(gz[j]); mag = fabs(want);
      for (int i = 0; i < GN; i++) begin
        t = fp2real(gemver_beta) * gBr[i][j] * fp2real(gy[i]); want += t; mag += fabs(t);
      end
      gxr[j] = want;
      checks++;
      if (!close(fp2real(gx[j]), want, 8.0 * mag)) fail("gemver x");
    end
    // component 2 on the stored B and x
    n_component_switch++;
    while (wb < GN/W) begin
      gemver_b2_valid <= (b2b < na) && ($urandom % 5 != 0);
      gemver_x2_valid <= (x2b < nv) && ($urandom % 4 != 0);
      gemver_w_ready  <= ($urandom % 3 != 0);
      for (int w = 0; w < W; w++) begin
        gemver_b2_data[w] <= gB[g_row(b2b < na ? b2b : 0)][g_col(b2b < na ? b2b : 0) + w];
        gemver_x2_data[w] <= gx[(x2b % (GN/W))*W + w];
      end
      @(posedge clk);
      if (gemver_b2_valid && gemver_b2_ready) b2b++;
      if (gemver_x2_valid && gemver_x2_ready) begin x2b++; if (x2b > GN/W) n_x_replay++; end
      if (gemver_w_valid && gemver_w_ready) begin
        for (int w = 0; w < W; w++) gw[wb*W + w] = gemver_w_data[w];
        wb++;
      end
    end
    gemver_b2_valid <= 0; gemver_x2_valid <= 0; gemver_w_ready <= 0;
    for (int i = 0; i < GN; i++) begin
      want = 0.0; mag = 0.0;
      for (int j = 0; j < GN; j++) begin
        t = fp2real(gemver_alpha) * gBr[i][j] * gxr[j]; want += t; mag += fabs(t);
      end
      checks++;
      if (!close(fp2real(gw[i]), want, 64.0 * mag)) fail("gemver w");
    end
  endtask

  // ------------------------------------------------------------------ GEMM
  task automatic run_gemm();
    int ab = 0, bb = 0, ob = 0;
    int nab = GM_TI*GM_TJ*GM_K*DA, nbb = GM_TI*GM_TJ*GM_K*DB, nob = GM_TI*GM_TJ*E*PR;
    gemm_tiles_r = GM_TI; gemm_tiles_c = GM_TJ; gemm_k_len = GM_K;
    foreach (mA[i, k]) mA[i][k] = rand_fp();
    foreach (mB[k, j]) mB[k][j] = rand_fp();
    while (ob < nob) begin
      int t, kk, x;
      gemm_a_valid <= (ab < nab) && ($urandom % 3 != 0);
      gemm_b_valid <= (bb < nbb) && ($urandom % 3 != 0);
      gemm_c_ready <= ($urandom % 4 != 0);
      t = (ab < nab ? ab : 0) / (GM_K*DA); kk = ((ab < nab ? ab : 0) % (GM_K*DA)) / DA; x = (ab < nab ? ab : 0) % DA;
      for (int r = 0; r < PR; r++) gemm_a_data[r] <= mA[(t / GM_TJ)*TR + x*PR + r][kk];
      t = (bb < nbb ? bb : 0) / (GM_K*DB); kk = ((bb < nbb ? bb : 0) % (GM_K*DB)) / DB; x = (bb < nbb ? bb : 0) % DB;
      for (int c = 0; c < PC; c++) gemm_b_data[c] <= mB[kk][(t % GM_TJ)*TC + x*PC + c];
      @(posedge clk);
      if (gemm_a_valid && gemm_a_ready) ab++;
      if (gemm_b_valid && gemm_b_ready) bb++;
      if (gemm_c_valid && gemm_c_ready) begin
        int e, r, i, j;
        t = ob / (E*PR); e = (ob % (E*PR)) / PR; r = ob % PR;
        i = (t / GM_TJ)*TR + (e / DB)*PR + r;
        for (int c = 0; c < PC; c++) begin
          real want = 0.0, mag = 0.0, p;
          j = (t % GM_TJ)*TC + (e % DB)*PC + c;
          for (int k = 0; k < GM_K; k++) begin
            p = fp2real(mA[i][k]) * fp2real(mB[k][j]); want += p; mag += fabs(p);
          end
          checks++;
          if (!close(fp2real(gemm_c_data[c]), want, 4.0 * mag)) fail("gemm C");
        end
        ob++;
      end
    end
    gemm_a_valid <= 0; gemm_b_valid <= 0; gemm_c_ready <= 0;
  endtask

  initial begin
    scal_x_valid = 0; scal_out_ready = 0; scal_x_data = '0;
    axpydot_v_valid = 0; axpydot_w_valid = 0; axpydot_u_valid = 0; axpydot_res_ready = 0;
    axpydot_v_data = '0; axpydot_w_data = '0; axpydot_u_data = '0;
    bicg_a_valid = 0; bicg_p_valid = 0; bicg_r_valid = 0; bicg_s_in_valid = 0;
    bicg_q_ready = 0; bicg_s_ready = 0;
    bicg_a_data = '0; bicg_p_data = '0; bicg_r_data = '0; bicg_s_in_data = '0;
    gemver_a_valid = 0; gemver_u1_valid = 0; gemver_v1_valid = 0; gemver_u2_valid = 0;
    gemver_v2_valid = 0; gemver_y_valid = 0; gemver_x_in_valid = 0; gemver_b_ready = 0;
    gemver_x_ready = 0; gemver_b2_valid = 0; gemver_x2_valid = 0; gemver_w_ready = 0;
    gemver_a_data = '0; gemver_u1_data = '0; gemver_v1_data = '0; gemver_u2_data = '0;
    gemver_v2_data = '0; gemver_y_data = '0; gemver_x_in_data = '0; gemver_b2_data = '0;
    gemver_x2_data = '0;
    gemm_a_valid = 0; gemm_b_valid = 0; gemm_c_ready = 0; gemm_a_data = '0; gemm_b_data = '0;
    scal_alpha = '0; axpydot_alpha = '0; axpydot_n_beats = 1; gemver_alpha = '0; gemver_beta = '0;
    bicg_tiles_n = 1; bicg_tiles_m = 1; gemver_tiles_n = 1;
    gemm_tiles_r = 1; gemm_tiles_c = 1; gemm_k_len = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    fork
      run_scal();
      run_axpydot();
      run_bicg();
      run_gemver();
      run_gemm();
    join
    $display("mechanisms: backpressure %0d, channel full %0d, fork stall %0d, x replay %0d, y replay %0d",
             n_backpressure, n_channel_full, n_fork_stall, n_x_replay, n_y_replay);
    $display("            gemm load wait %0d, compute wait %0d, drain beats %0d, gemver component switch %0d",
             n_load_wait, n_compute_wait, n_drain, n_component_switch);
    if (CHECK_MECH) begin
      checks++;
      if (n_backpressure == 0 || n_channel_full == 0 || n_fork_stall == 0 || n_x_replay == 0 ||
          n_y_replay == 0 || n_load_wait == 0 || n_compute_wait == 0 || n_drain == 0 ||
          n_component_switch == 0) fail("a mechanism never happened");
    end
    $display("finished at cycle %0d", cyc);
    finish_run();
  end

  initial begin
    repeat (WD_CYCLES) @(posedge clk);
    $display("FAIL watchdog expired at cycle %0d", cyc);
    failures++;
    finish_run();
  end
