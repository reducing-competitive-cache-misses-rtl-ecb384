// tb_prefetcher: checks the prefetch queue (depth 4) against a reference
// queue: addresses come out oldest first, at most 4 wait, an address offered
// to a full queue is dropped and counted unless a pop frees a slot in the
// same cycle. Directed fill-to-overflow, then random push/pop traffic.
module tb_prefetcher;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic        in_valid, pf_valid, pf_ready;
  logic [31:0] in_addr, pf_addr;
  logic [2:0]  count;
  logic [31:0] dropped;
  int checks = 0, failures = 0;
  logic [31:0] q [$];
  int exp_drop = 0;
  logic [31:0] next_addr = 32'h500;

  prefetcher dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bit push, input bit ready);
    bit pop;
    in_valid = push; in_addr = next_addr; pf_ready = ready;
    #1;
    checks++;
    if (pf_valid !== (q.size() > 0) || int'(count) != q.size() || (q.size() > 0 && pf_addr != q[0])) begin
      failures++;
      $display("FAIL head: valid %b addr %h count %0d, model size %0d head %h",
               pf_valid, pf_addr, count, q.size(), q.size() ? q[0] : 0);
    end
    pop = ready && q.size() > 0;
    if (pop) void'(q.pop_front());
    if (push) begin
      if (q.size() < DEPTH) q.push_back(next_addr);
      else exp_drop++;
      next_addr++;
    end
    @(negedge clk);
    checks++;
    if (dropped != exp_drop) begin failures++; $display("FAIL dropped %0d exp %0d", dropped, exp_drop); end
  endtask

  initial begin
    in_valid = 0; in_addr = 0; pf_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    repeat (6) step(1, 0);      // 4 queued, 2 dropped
    step(1, 1);                 // full queue, pop and push together
    repeat (6) step(0, 1);      // drain
    for (int i = 0; i < 5000; i++) step(($urandom % 3) != 0, ($urandom % 2) != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
