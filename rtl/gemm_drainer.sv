// gemm_drainer: DRAIN-C_c of the systolic GEMM array.
//
// Holds the C element that leaves the top PE of column IDX on each drain
// shift, and inserts it at position IDX of the result vector that runs along
// the drainer chain toward the store helper (drainer IDX+1 feeds drainer IDX,
// drainer 0 feeds the output). The chain is combinational, so one result
// vector of LEN elements, a full row segment of the C tile, leaves per
// shift. The chain direction follows the source's figure; the vector width
// of the output is this design's choice.
module gemm_drainer
  import fblas_pkg::*;
#(
  parameter int LEN = 80,
  parameter int IDX = 0
) (
  input  logic            clk,
  input  logic            shift,
  input  fp32_t           col_in,
  input  fp32_t [LEN-1:0] chain_in,
  output fp32_t [LEN-1:0] chain_out
);
  fp32_t hold;
  always_ff @(posedge clk) begin
    if (shift) hold <= col_in;
  end
  always_comb begin
    chain_out      = chain_in;
    chain_out[IDX] = hold;
  end
endmodule
