// gemm_feeder: one feeder of the systolic GEMM array (FEED-A_r or FEED-B_c).
//
// Feeders form a chain fed by the read helper: every beat of the input
// stream (a slice of LEN elements of A, or of B) travels down the chain one
// feeder per cycle, and feeder IDX keeps element IDX of it. The beat's tag
// says which of two buffer banks and which slot it belongs to, so the next
// k-slab can be loaded while the current one is being computed (double
// buffering). On a read request from the controller the feeder looks up its
// value and sends it, with the request's control fields, into a delay line of
// IDX extra registers before it enters PE row (or column) IDX. That skew of
// IDX cycles makes the A element and the B element meant for the same step
// meet in every PE of the array. Read latency: 1 + IDX cycles. DEPTH is the
// number of slots per bank (TR/PR for A, TC/PC for B). Chaining follows the
// source's figure; banking, tags and skew are this design's choices.
module gemm_feeder
  import fblas_pkg::*;
#(
  parameter int LEN   = 40,
  parameter int IDX   = 0,
  parameter int DEPTH = 24,
  parameter int DW    = 5,
  parameter int EW    = 9
) (
  input  logic                clk,
  input  logic                rst_n,
  // load chain
  input  logic                ld_valid_in,
  input  logic                ld_bank_in,
  input  logic [DW-1:0]       ld_idx_in,
  input  logic                ld_last_in,
  input  fp32_t [LEN-1:0]     ld_data_in,
  output logic                ld_valid_out,
  output logic                ld_bank_out,
  output logic [DW-1:0]       ld_idx_out,
  output logic                ld_last_out,
  output fp32_t [LEN-1:0]     ld_data_out,
  // read request from the controller
  input  logic                rd_valid,
  input  logic                rd_bank,
  input  logic [DW-1:0]       rd_idx,
  input  logic                rd_first,
  input  logic [EW-1:0]       rd_e,
  // skewed operand to the array
  output logic                pe_valid,
  output logic                pe_first,
  output logic [EW-1:0]       pe_e,
  output fp32_t               pe_data
);
  localparam int NS = IDX + 1;

  fp32_t             mem [2][DEPTH];
  logic [NS-1:0]     sk_valid;
  logic [NS-1:0]     sk_first;
  logic [EW-1:0]     sk_e    [NS];
  fp32_t             sk_data [NS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_valid_out <= 1'b0;
      sk_valid     <= '0;
    end else begin
      ld_valid_out <= ld_valid_in;
      sk_valid     <= (sk_valid << 1) | NS'(rd_valid);
    end
  end

  always_ff @(posedge clk) begin
    ld_bank_out <= ld_bank_in;
    ld_idx_out  <= ld_idx_in;
    ld_last_out <= ld_last_in;
    ld_data_out <= ld_data_in;
    if (ld_valid_in) mem[ld_bank_in][ld_idx_in] <= ld_data_in[IDX];
    sk_first[0] <= rd_first;
    sk_e[0]     <= rd_e;
    sk_data[0]  <= mem[rd_bank][rd_idx];
    for (int s = 1; s < NS; s++) begin
      sk_first[s] <= sk_first[s-1];
      sk_e[s]     <= sk_e[s-1];
      sk_data[s]  <= sk_data[s-1];
    end
  end

  assign pe_valid = sk_valid[NS-1];
  assign pe_first = sk_first[NS-1];
  assign pe_e     = sk_e[NS-1];
  assign pe_data  = sk_data[NS-1];
endmodule
