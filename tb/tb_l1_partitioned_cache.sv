// tb_l1_partitioned_cache: checks the thread-partitioned L1 at its default
// size (128 lines, 4 threads) against a reference model that keeps, per
// thread, a first-in first-out list of at most 32 blocks.
//  - Directed: thread 0 loads 32 blocks; every thread then hits on them and
//    sees owner 0. Thread 1 loads 200 further blocks, far more than the whole
//    cache: all of thread 0's blocks must still hit (refills stay inside the
//    refilling thread's partition), and thread 1 keeps exactly its last 32.
//  - Random: refills by random threads of fresh addresses mixed with lookups
//    of old and new addresses; hit, data and owner must match the model.
module tb_l1_partitioned_cache;
  import cmc_tb_pkg::*;
  localparam int T = 4, LINES = 128, PART = LINES / T;
  logic clk = 0, rst_n = 0;
  logic [31:0] lk_addr;
  logic        lk_hit;
  logic [31:0] lk_data;
  logic [1:0]  lk_owner;
  logic        fill_valid;
  logic [1:0]  fill_tid;
  logic [31:0] fill_addr, fill_data;
  logic        fill_victim_valid;
  logic [31:0] fill_victim_addr;
  int checks = 0, failures = 0;
  logic [31:0] model [T][$];   // per-thread FIFO of resident addresses
  logic [31:0] next_addr = 32'h1000;

  l1_partitioned_cache dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model_owner(input logic [31:0] a);
    for (int t = 0; t < T; t++)
      foreach (model[t][i]) if (model[t][i] == a) return t;
    return -1;
  endfunction

  task automatic do_fill(input int tid, input logic [31:0] a);
    fill_valid = 1; fill_tid = 2'(tid); fill_addr = a; fill_data = mem_data(a);
    #1;
    checks++;
    if (model[tid].size() == PART) begin
      if (!fill_victim_valid || fill_victim_addr != model[tid][0]) begin
        failures++;
        $display("FAIL victim of thread %0d: got %b/%h exp %h", tid, fill_victim_valid, fill_victim_addr, model[tid][0]);
      end
      void'(model[tid].pop_front());
    end else if (fill_victim_valid) begin
      failures++;
      $display("FAIL thread %0d evicted a block before its partition was full", tid);
    end
    model[tid].push_back(a);
    @(negedge clk);
    fill_valid = 0;
  endtask

  task automatic do_lookup(input logic [31:0] a);
    int own;
    lk_addr = a;
    #1;
    own = model_owner(a);
    checks++;
    if (lk_hit !== (own >= 0) || (own >= 0 && (lk_data != mem_data(a) || int'(lk_owner) != own))) begin
      failures++;
      $display("FAIL lookup %h: hit=%b data=%h owner=%0d, model owner %0d", a, lk_hit, lk_data, lk_owner, own);
    end
    @(negedge clk);
  endtask

  initial begin
    fill_valid = 0; fill_tid = 0; fill_addr = 0; fill_data = 0; lk_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // empty cache misses everywhere
    for (int i = 0; i < 8; i++) do_lookup(32'h1000 + i);
    // thread 0 fills its partition
    for (int i = 0; i < PART; i++) begin do_fill(0, next_addr); next_addr++; end
    for (int i = 0; i < PART; i++) do_lookup(32'h1000 + i);
    // thread 1 streams 200 blocks through its own partition
    for (int i = 0; i < 200; i++) begin do_fill(1, next_addr); next_addr++; end
    for (int i = 0; i < PART; i++) begin
      do_lookup(32'h1000 + i);  // thread 0's blocks survive
      checks++;
      if (!lk_hit) begin failures++; $display("FAIL thread 0 block %0d lost", i); end
    end
    for (int i = 0; i < 200; i++) do_lookup(32'h1000 + PART + i);  // only last 32 of thread 1 hit
    // random mix
    for (int i = 0; i < 4000; i++) begin
      if ($urandom % 2) begin
        do_fill(int'($urandom % T), next_addr); next_addr++;
      end else begin
        do_lookup(32'h1000 + ($urandom % (next_addr - 32'h1000 + 4)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
