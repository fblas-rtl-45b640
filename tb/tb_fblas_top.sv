// End-to-end testbench of fblas_top at reduced size.
// What: drives all five accelerators of the top at the same time (SCAL,
// AXPYDOT, BICG, GEMVER with both of its components, tiled systolic GEMM)
// with random valid gaps and random output back-pressure, and checks every
// result against a double-precision reference.
// How: the stimulus, references and mechanism counters live in
// fblas_top_body.svh; this file picks small parameters (W=4, 8x8 tiles, a
// 2x3 PE array with 4x6 tiles) so that several tiles, vector replays and
// GEMM double-buffer switches happen in a short run.
// Mechanisms counted, each of which must be seen at least once: stream
// back-pressure, a full inter-module channel (AXPYDOT), the BICG fork
// stalling on a full branch, replay of the GEMV x vector and of the GEMV-T
// y vector, GEMM loads waiting for a free buffer, GEMM compute waiting for a
// loaded tile, GEMM drain, and the switch to GEMVER's second component.
// Timing: a watchdog ends the run if it has not finished in WD_CYCLES.
module tb_fblas_top;
  localparam int W = 4, TN = 8, TM = 8, LAT_M = 6, LAT_A = 6, FIFO_DEPTH = 4;
  localparam int PR = 2, PC = 3, TR = 4, TC = 6;
  localparam int SC_NB = 40, AD_NB = 12, AD_CALLS = 3;
  localparam int BI_TI = 2, BI_TJ = 3, GV_TI = 2;
  localparam int GM_TI = 2, GM_TJ = 2, GM_K = 5;
  localparam bit CHECK_MECH = 1;
  localparam int WD_CYCLES = 200000;

`include "fblas_top_body.svh"

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  fblas_top #(.W(W), .TN(TN), .TM(TM), .LAT_M(LAT_M), .LAT_A(LAT_A), .FIFO_DEPTH(FIFO_DEPTH),
              .PR(PR), .PC(PC), .TR(TR), .TC(TC)) dut (.*);
endmodule
