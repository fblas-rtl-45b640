// tb_channel_fifo: self-checking test of channel_fifo.
// A producer and a consumer run with independent random stalls; the test
// checks that words leave in the order they entered, that nothing is lost
// or duplicated, that the queue reports full after DEPTH words with a
// stalled consumer, and that it forwards a word to an empty output.
module tb_channel_fifo;
  localparam int WIDTH = 16, DEPTH = 8, NW = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  int checks = 0, failures = 0, full_seen = 0;

  channel_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent = 0, got = 0, cnt;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // fill with the consumer stalled: exactly DEPTH words go in
    cnt = 0;
    for (int i = 0; i < DEPTH + 4; i++) begin
      in_valid <= 1; in_data <= WIDTH'(sent);
      @(posedge clk);
      if (in_valid && in_ready) begin sent++; cnt++; end
    end
    checks++;
    if (cnt != DEPTH || in_ready) begin failures++; $display("took %0d words when full", cnt); end
    else full_seen++;
    // random traffic
    while (got < NW) begin
      in_valid  <= (sent < NW) && ($urandom % 3 != 0);
      in_data   <= WIDTH'(sent);
      out_ready <= ($urandom % 3 != 0);
      @(posedge clk);
      if (in_valid && in_ready) sent++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != WIDTH'(got)) begin
          failures++;
          $display("word %0d came out as %0d", got, out_data);
        end
        got++;
      end
    end
    in_valid <= 0; out_ready <= 0;
    @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("queue not empty at end"); end
    // fall-through: a word written to an empty queue shows one cycle later
    in_valid <= 1; in_data <= 16'hbeef;
    @(posedge clk);
    in_valid <= 0;
    @(posedge clk);
    checks++;
    if (!out_valid || out_data != 16'hbeef) begin failures++; $display("no fall-through"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
