// tb_thread_arbiter: checks the round-robin grant against an independent
// model: the granted thread must be the first requesting one at or after the
// priority pointer, which moves past each taken grant. Random request and
// take patterns, plus a directed check that four always-requesting threads
// are served in turn, one per cycle.
module tb_thread_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req;
  logic take;
  logic gnt_valid;
  logic [1:0] gnt_idx;
  int checks = 0, failures = 0;
  int prio_m = 0;

  thread_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_cycle();
    int exp_idx = -1;
    for (int k = 0; k < N; k++) begin
      int t = (prio_m + k) % N;
      if (exp_idx < 0 && req[t]) exp_idx = t;
    end
    checks++;
    if (gnt_valid !== (exp_idx >= 0) || (exp_idx >= 0 && int'(gnt_idx) != exp_idx)) begin
      failures++;
      $display("FAIL req=%b prio=%0d gnt_valid=%b gnt=%0d exp=%0d", req, prio_m, gnt_valid, gnt_idx, exp_idx);
    end
    if (exp_idx >= 0 && take) prio_m = (exp_idx + 1) % N;
  endtask

  initial begin
    req = '0; take = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // all threads requesting: served 0,1,2,3,0,...
    req = '1; take = 1;
    for (int i = 0; i < 8; i++) begin
      #1;
      checks++;
      if (int'(gnt_idx) != i % N) begin failures++; $display("FAIL turn %0d got %0d", i, gnt_idx); end
      check_cycle();
      @(negedge clk);
    end
    // random
    for (int i = 0; i < 2000; i++) begin
      req  = N'($urandom);
      take = ($urandom % 4) != 0;
      #1;
      check_cycle();
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
