// Large-size testbench of fblas_top.
// What: runs one complete call of every accelerator with the vector and
// matrix-vector parts at their default sizes: 16-wide streams, 1024x1024
// tiles, operator latency 6, channel depth 64. Only the systolic GEMM is
// smaller than its default (8x16 PEs with 96x96 tiles instead of 40x80 PEs
// with 960x960 tiles): the simulator's build of the full 3200-PE array is
// too slow to be practical.
// How: the same stimulus and checking as the reduced-size test
// (fblas_top_body.svh), with problem sizes of one tile: SCAL and AXPYDOT on
// 1024 elements, BICG and both GEMVER components on a 1024x1024 matrix, and
// a 2x2-tile GEMM with inner dimension 3.
// Timing: a watchdog ends the run if it has not finished in WD_CYCLES.
module tb_fblas_top_large;
  localparam int W = 16, TN = 1024, TM = 1024, LAT_M = 6, LAT_A = 6, FIFO_DEPTH = 64;
  localparam int PR = 8, PC = 16, TR = 96, TC = 96;
  localparam int SC_NB = 64, AD_NB = 64, AD_CALLS = 1;
  localparam int BI_TI = 1, BI_TJ = 1, GV_TI = 1;
  localparam int GM_TI = 2, GM_TJ = 2, GM_K = 3;
  localparam bit CHECK_MECH = 0;
  localparam int WD_CYCLES = 2000000;

`include "fblas_top_body.svh"

  task automatic finish_run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  fblas_top #(.W(W), .TN(TN), .TM(TM), .LAT_M(LAT_M), .LAT_A(LAT_A), .FIFO_DEPTH(FIFO_DEPTH),
              .PR(PR), .PC(PC), .TR(TR), .TC(TC)) dut (.*);
endmodule
