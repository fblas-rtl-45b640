// stream_fork: copies one valid/ready stream to two consumers.
//
// A word is taken from the producer only when both consumers can take it in
// the same cycle, so both see every word in the same order; a stalled
// consumer stalls the producer and, through it, the other consumer. Used
// where one interface module feeds two computational modules (the shared
// matrix of BICG, the updated matrix of GEMVER). Consumers are normally
// channel_fifo queues, which decouple the two sides by their depth.
module stream_fork #(
  parameter int WIDTH = 32
) (
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out0_valid,
  input  logic             out0_ready,
  output logic [WIDTH-1:0] out0_data,
  output logic             out1_valid,
  input  logic             out1_ready,
  output logic [WIDTH-1:0] out1_data
);
  assign in_ready   = out0_ready && out1_ready;
  assign out0_valid = in_valid && out1_ready;
  assign out1_valid = in_valid && out0_ready;
  assign out0_data  = in_data;
  assign out1_data  = in_data;
endmodule
