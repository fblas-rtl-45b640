// stall_pipe: a DEPTH-stage register pipeline with a valid bit per stage and
// a common stall.
//
// It models the fixed latency of a hardened floating point operator: data
// computed combinationally in front of it emerges DEPTH cycles later. All
// stages advance together when the last stage is empty or the consumer takes
// its word (adv); otherwise the whole pipe holds. in_ready equals adv, so an
// upstream word is accepted in the same cycle the pipe advances.
// DEPTH = 0 turns the pipe into a wire.
module stall_pipe #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  if (DEPTH == 0) begin : g_wire
    assign out_valid = in_valid;
    assign out_data  = in_data;
    assign in_ready  = out_ready;
  end else begin : g_pipe
    logic [DEPTH-1:0]            vld;
    logic [DEPTH-1:0][WIDTH-1:0] dat;
    logic                        adv;
    assign adv       = !vld[DEPTH-1] || out_ready;
    assign in_ready  = adv;
    assign out_valid = vld[DEPTH-1];
    assign out_data  = dat[DEPTH-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld <= '0;
      else if (adv) vld <= {vld[DEPTH-2:0], in_valid};
    end
    always_ff @(posedge clk) begin
      if (adv) dat <= {dat[DEPTH-2:0], in_data};
    end
  end
endmodule
