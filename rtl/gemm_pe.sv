// gemm_pe: one processing element of the systolic GEMM array.
//
// Each cycle in which the row carries a valid operand the PE multiplies the
// element of A arriving from the left by the element of B arriving from
// above and adds the product to one of its E local elements of the C tile
// (e_in selects it; first_in marks the first k-step, which overwrites
// instead of adding). A, its control fields and B are passed on, one
// register each, to the right and downward neighbours, so data moves one PE
// per cycle. For draining, the PE copies a selected C element into its drain
// register (drain_load) or takes the drain register of the PE below
// (drain_shift); the register is visible to the PE above. The six data
// connections (A in/out, B in/out, drain in/out) are the constant fan-out of
// the source's PE. The multiply-add is done in one cycle, as the device's
// DSP blocks do; the drain shift chain is this design's choice.
module gemm_pe
  import fblas_pkg::*;
#(
  parameter int E  = 288,
  parameter int EW = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_valid_in,
  input  logic          first_in,
  input  logic [EW-1:0] e_in,
  input  fp32_t         a_in,
  input  fp32_t         b_in,
  output logic          a_valid_out,
  output logic          first_out,
  output logic [EW-1:0] e_out,
  output fp32_t         a_out,
  output fp32_t         b_out,
  input  logic          drain_load,
  input  logic          drain_shift,
  input  logic [EW-1:0] drain_e,
  input  fp32_t         drain_in,
  output fp32_t         drain_out
);
  fp32_t cbuf [E];
  fp32_t prod;

  assign prod = fp_mul(a_in, b_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a_valid_out <= 1'b0;
    else        a_valid_out <= a_valid_in;
  end

  always_ff @(posedge clk) begin
    first_out <= first_in;
    e_out     <= e_in;
    a_out     <= a_in;
    b_out     <= b_in;
    if (a_valid_in)
      cbuf[e_in] <= first_in ? prod : fp_add(cbuf[e_in], prod);
    if (drain_load)       drain_out <= cbuf[drain_e];
    else if (drain_shift) drain_out <= drain_in;
  end
endmodule
