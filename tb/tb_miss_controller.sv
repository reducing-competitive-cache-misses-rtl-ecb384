// tb_miss_controller: checks the miss controller with small L2/L3 (4 and 8
// lines, so that blocks move between levels quickly) and the 60-cycle memory
// model. A reference model keeps the L2 and L3 contents as FIFO lists and
// predicts, for every demand miss, the level that serves it, the data, the
// thread it answers and the exact cycle count (L2: 3+2, L3: 10+2, memory:
// 60+3), and for every prefetch whether it loads L2 or is dropped as present.
// Directed steps reach each source once, then a random mix of demand misses
// and prefetches over a small address range runs; the miss counters are
// compared at the end. It also checks that a demand miss wins over a
// waiting prefetch and that a prefetch never writes the L1.
module tb_miss_controller;
  import cmc_pkg::*;
  import cmc_tb_pkg::*;
  localparam int L2S = 4, L3S = 8, RAM_CYC = 60;
  logic clk = 0, rst_n = 0;
  logic        dm_valid, dm_ready, pf_valid, pf_ready;
  logic [1:0]  dm_tid;
  logic [31:0] dm_addr, pf_addr;
  logic        l1_fill_valid;
  logic [1:0]  l1_fill_tid;
  logic [31:0] l1_fill_addr, l1_fill_data;
  src_e        resp_src;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0] mem_req_addr, mem_resp_data;
  logic [31:0] l1_misses, l2_misses, l3_misses, pf_issued, pf_present;
  logic        busy;
  int unsigned ram_reqs;
  int checks = 0, failures = 0;
  int e_l1m = 0, e_l2m = 0, e_l3m = 0, e_pfi = 0, e_pfp = 0;
  logic [31:0] m2 [$], m3 [$];

  miss_controller #(.L2_SIZE(L2S), .L3_SIZE(L3S)) dut (.*);

  ram_model #(.LAT(RAM_CYC)) u_ram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_addr(mem_req_addr),
    .req_ready(mem_req_ready), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .requests(ram_reqs)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a prefetch must never touch the L1
  always @(posedge clk) if (rst_n && l1_fill_valid && dut.is_pf) begin
    failures++; $display("FAIL prefetch wrote L1");
  end

  function automatic bit in_q(ref logic [31:0] q [$], input logic [31:0] a);
    foreach (q[i]) if (q[i] == a) return 1;
    return 0;
  endfunction
  function automatic void fill_q(ref logic [31:0] q [$], input int cap, input logic [31:0] a);
    if (q.size() == cap) void'(q.pop_front());
    q.push_back(a);
  endfunction

  // predicted source, updating the model
  function automatic src_e model_access(input logic [31:0] a, input bit is_pf);
    if (in_q(m2, a)) return SRC_L2;
    if (!is_pf) e_l2m++;
    if (in_q(m3, a)) begin fill_q(m2, L2S, a); return SRC_L3; end
    if (!is_pf) e_l3m++;
    fill_q(m3, L3S, a); fill_q(m2, L2S, a);
    return SRC_RAM;
  endfunction

  task automatic demand(input logic [31:0] a, input int tid);
    src_e exp_src;
    int exp_lat, k;
    exp_src = model_access(a, 0);
    e_l1m++;
    exp_lat = (exp_src == SRC_L2) ? 2 + L2_LAT : (exp_src == SRC_L3) ? 2 + L3_LAT : 3 + RAM_CYC;
    dm_valid = 1; dm_addr = a; dm_tid = 2'(tid);
    #1;
    checks++;
    if (!dm_ready) begin failures++; $display("FAIL controller not idle"); end
    @(negedge clk);
    dm_valid = 0;
    k = 1;
    while (!l1_fill_valid && k < 200) begin @(negedge clk); k++; end
    checks++;
    if (!l1_fill_valid || k != exp_lat || resp_src != exp_src || int'(l1_fill_tid) != tid ||
        l1_fill_addr != a || l1_fill_data != mem_data(a)) begin
      failures++;
      $display("FAIL demand %h: src %0d exp %0d, %0d cycles exp %0d, tid %0d, data %h",
               a, resp_src, exp_src, k, exp_lat, l1_fill_tid, l1_fill_data);
    end
    @(negedge clk);
  endtask

  task automatic prefetch(input logic [31:0] a);
    src_e exp_src;
    exp_src = model_access(a, 1);
    if (exp_src == SRC_L2) e_pfp++; else e_pfi++;
    pf_valid = 1; pf_addr = a;
    #1;
    checks++;
    if (!pf_ready) begin failures++; $display("FAIL prefetch not taken while idle"); end
    @(negedge clk);
    pf_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    dm_valid = 0; pf_valid = 0; dm_tid = 0; dm_addr = 0; pf_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    demand(32'd100, 0);                       // memory
    demand(32'd100, 1);                       // L2
    for (int i = 1; i <= 4; i++) demand(32'd100 + i, i % 4);  // pushes 100 out of L2
    demand(32'd100, 2);                       // L3
    prefetch(32'd200);                        // loads L2 from memory
    demand(32'd200, 3);                       // L2 thanks to the prefetch
    prefetch(32'd200);                        // already in L2: dropped
    // demand miss has priority over a waiting prefetch
    dm_valid = 1; dm_addr = 32'd101; dm_tid = 1; pf_valid = 1; pf_addr = 32'd300;
    #1;
    checks++;
    if (!dm_ready || pf_ready) begin failures++; $display("FAIL priority dm/pf"); end
    dm_valid = 0; pf_valid = 0;
    @(negedge clk);
    // random mix
    for (int i = 0; i < 300; i++) begin
      logic [31:0] a;
      a = 32'd1 + ($urandom % 16);
      if ($urandom % 4 == 0) prefetch(a);
      else demand(a, int'($urandom % 4));
    end
    checks++;
    if (l1_misses != e_l1m || l2_misses != e_l2m || l3_misses != e_l3m ||
        pf_issued != e_pfi || pf_present != e_pfp) begin
      failures++;
      $display("FAIL counters %0d %0d %0d %0d %0d exp %0d %0d %0d %0d %0d", l1_misses, l2_misses,
               l3_misses, pf_issued, pf_present, e_l1m, e_l2m, e_l3m, e_pfi, e_pfp);
    end
    $display("demand misses %0d, L2 misses %0d, L3 misses %0d, prefetches %0d loaded %0d dropped",
             l1_misses, l2_misses, l3_misses, pf_issued, pf_present);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
