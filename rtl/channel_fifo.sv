// channel_fifo: bounded single-producer / single-consumer queue that carries
// a stream between two modules on chip (an edge of a module graph).
//
// Circular buffer of DEPTH words with separate read and write pointers and an
// occupancy counter. Both sides use valid/ready: a word moves when valid and
// ready are high in the same cycle. The producer stalls when the queue is
// full, the consumer when it is empty. Read data comes straight from the
// array (first-word fall-through), so an empty queue forwards a word one
// cycle after it is written. The depth is this design's choice; the source
// leaves channel sizes to the user.
module channel_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 32
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
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + AW'(1);
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  // a full queue never takes a word, an empty one never gives one
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));
endmodule
