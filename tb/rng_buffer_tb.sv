// rng_buffer_tb: random push/pop traffic against a queue reference, plus
// filling to full (pushes then ignored) and draining to empty.
module rng_buffer_tb;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [31:0] din = 0, head;
  logic empty, full;
  logic [8:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0, n_full = 0;

  rng_buffer #(.WIDTH(32), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .head,
                                              .empty, .full, .count);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic pu, input logic po);
    @(negedge clk);
    // state check before the edge
    checks++;
    if (count != 9'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH) ||
        (q.size() > 0 && head != q[0])) begin
      failures++;
      $display("FAIL count=%0d ref=%0d head=%h ref=%h", count, q.size(), head,
               q.size() > 0 ? q[0] : 0);
    end
    if (full) n_full++;
    push = pu; pop = po; din = $urandom;
    begin
      automatic bit was_full = (q.size() == DEPTH);
      automatic bit was_empty = (q.size() == 0);
      @(posedge clk);
      if (po && !was_empty) void'(q.pop_front());
      if (pu && !was_full) q.push_back(din);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) step($urandom_range(0, 1), $urandom_range(0, 2) == 0);
    for (int i = 0; i < DEPTH + 20; i++) step(1, 0);        // fill past full
    for (int i = 0; i < 50; i++) step(1, 1);               // push+pop when full
    for (int i = 0; i < DEPTH + 20; i++) step(0, 1);        // drain past empty
    for (int i = 0; i < 500; i++) step($urandom_range(0, 1), $urandom_range(0, 1));
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
