// tb_cmc_top: end-to-end test of the whole memory system at its default
// sizes (4 threads, L1/L2/L3 of 128/256/512 blocks, prefetch depth 4) with
// the 60-cycle main memory model.
//
// A monitor keeps a reference model of the L1 (one FIFO list of at most 32
// blocks per thread) and checks every response: the data word; that an L1
// hit names a block the model holds; that a miss names a block the model
// does not hold, after which the block joins the requesting thread's list.
// A refill that evicted another thread's block would therefore show up as a
// wrong hit or a wrong miss later.
//
// Part 1, directed: first-touch misses from memory (64 cycles), an L1 hit
// (1 cycle) on a block another thread loaded, one thread streaming 200 blocks
// while another thread's 32 blocks all stay in L1, an L2 hit (6 cycles), an
// L3 hit (13 cycles), a prefetch that turns a later miss into an L2 hit, a
// prefetch dropped because the block is in L2, prefetches dropped by a full
// queue, and a miss refused while another is in flight.
// Part 2, workload: each thread runs a stream of memory accesses with
// addresses drawn from a triangular distribution over 1..500 (the reference
// simulator's memory instructions: 22.5% of 20000 instructions, i.e. 4500
// accesses, split over 4 threads). The address of each thread's access four
// ahead is offered to the prefetch queue. Every mechanism must have occurred
// at least once; the counters must agree with the monitor.
module tb_cmc_top;
  import cmc_pkg::*;
  import cmc_tb_pkg::*;
  localparam int T = 4, PART = L1_LINES / T;
  localparam int N_PER_THREAD = 4500 / T;

  logic clk = 0, rst_n = 0;
  logic [T-1:0] req_valid, resp_valid;
  logic [31:0]  req_addr [T];
  logic [31:0]  resp_data [T];
  src_e         resp_src [T];
  logic         pf_in_valid;
  logic [31:0]  pf_in_addr;
  logic         mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0]  mem_req_addr, mem_resp_data;
  counters_t    counters;
  int unsigned  ram_reqs;

  cmc_top dut (.*);

  ram_model #(.LAT(RAM_LAT)) u_ram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_addr(mem_req_addr),
    .req_ready(mem_req_ready), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .requests(ram_reqs)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counts seen by the monitor
  int n_own_hit = 0, n_shared_hit = 0, n_l2 = 0, n_l3 = 0, n_ram = 0, n_evict = 0;
  int n_resp = 0, n_miss = 0;
  logic [31:0] l1m [T][$];      // reference L1, one FIFO per thread
  int          last_lat [T];
  src_e        last_src [T];
  int unsigned cycle = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int owner_of(input logic [31:0] a);
    for (int t = 0; t < T; t++) foreach (l1m[t][i]) if (l1m[t][i] == a) return t;
    return -1;
  endfunction

  // ---------------- response monitor ----------------
  // Runs between the rising edge, where responses change, and the falling
  // edge, where the thread drivers move on to their next request.
  always @(posedge clk) if (rst_n) begin
    #2;
    // hits first: their lookup saw the L1 before a refill of the same edge
    for (int t = 0; t < T; t++) if (resp_valid[t] && resp_src[t] == SRC_L1) begin
      int o;
      o = owner_of(req_addr[t]);
      n_resp++; checks += 2;
      if (resp_data[t] != mem_data(req_addr[t])) begin failures++; $display("FAIL data t%0d %h", t, req_addr[t]); end
      if (o < 0) begin failures++; $display("FAIL t%0d hit on %h which the L1 should not hold", t, req_addr[t]); end
      else if (o == t) n_own_hit++;
      else n_shared_hit++;
    end
    for (int t = 0; t < T; t++) if (resp_valid[t] && resp_src[t] != SRC_L1) begin
      n_resp++; n_miss++; checks += 2;
      if (resp_data[t] != mem_data(req_addr[t])) begin failures++; $display("FAIL data t%0d %h", t, req_addr[t]); end
      if (owner_of(req_addr[t]) >= 0) begin failures++; $display("FAIL t%0d missed on %h which the L1 holds", t, req_addr[t]); end
      if (l1m[t].size() == PART) begin void'(l1m[t].pop_front()); n_evict++; end
      l1m[t].push_back(req_addr[t]);
      case (resp_src[t])
        SRC_L2:  n_l2++;
        SRC_L3:  n_l3++;
        default: n_ram++;
      endcase
    end
  end

  // ---------------- thread drivers ----------------
  task automatic access(input int t, input logic [31:0] a);
    int k = 0;
    req_valid[t] = 1; req_addr[t] = a;
    do begin @(negedge clk); k++; end while (!resp_valid[t]);
    last_lat[t] = k;
    last_src[t] = resp_src[t];
    req_valid[t] = 0;
  endtask

  // Starts from an idle cycle, so the request is not masked by the response
  // to the thread's previous one and the latency is the bare one.
  task automatic expect_access(input int t, input logic [31:0] a, input src_e src, input int lat);
    @(negedge clk);
    access(t, a);
    checks++;
    if (last_src[t] != src || last_lat[t] != lat) begin
      failures++;
      $display("FAIL t%0d %h: src %s in %0d cycles, expected %s in %0d", t, a, last_src[t].name(),
               last_lat[t], src.name(), lat);
    end
  endtask

  task automatic pf_push(input logic [31:0] a);
    pf_in_valid = 1; pf_in_addr = a;
    @(negedge clk);
    pf_in_valid = 0;
  endtask

  // workload: per-thread address streams and the prefetch feed
  logic [31:0] wl [T][N_PER_THREAD + 8];
  logic [31:0] pf_list [$];
  bit          wl_run = 0;

  always @(negedge clk) if (wl_run) begin
    if (pf_list.size() > 0) begin pf_in_valid <= 1; pf_in_addr <= pf_list.pop_front(); end
    else pf_in_valid <= 0;
  end

  task automatic run_thread(input int t);
    for (int k = 0; k < N_PER_THREAD; k++) begin
      pf_list.push_back(wl[t][k + PF_DEPTH]);
      access(t, wl[t][k]);
      // the core's own work between memory instructions (77.5% of instructions)
      repeat ($urandom % 4) @(negedge clk);
    end
  endtask

  int unsigned t0, t1;
  int pf_drops_before;

  initial begin
    req_valid = '0; pf_in_valid = 0; pf_in_addr = 0;
    for (int t = 0; t < T; t++) req_addr[t] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- part 1: directed ----
    expect_access(0, 32'd1000, SRC_RAM, RAM_LAT + 4);
    for (int i = 1; i < PART; i++) access(0, 32'd1000 + i);
    expect_access(1, 32'd1000, SRC_L1, 1);                    // shared hit
    for (int i = 0; i < 200; i++) access(1, 32'd2000 + i);    // thread 1 streams
    for (int i = 0; i < PART; i++) expect_access(0, 32'd1000 + i, SRC_L1, 1);  // isolation
    expect_access(1, 32'd2000, SRC_L2, L2_LAT + 3);
    for (int i = 0; i < 100; i++) access(2, 32'd3000 + i);    // pushes old blocks out of L2
    expect_access(1, 32'd2001, SRC_L3, L3_LAT + 3);
    // prefetch into L2, never into L1
    pf_push(32'd4000);
    repeat (RAM_LAT + 10) @(negedge clk);
    checks++;
    if (counters.pf_issued != 1) begin failures++; $display("FAIL prefetch not issued"); end
    expect_access(3, 32'd4000, SRC_L2, L2_LAT + 3);
    pf_push(32'd4000);                                        // present in L2: dropped
    repeat (5) @(negedge clk);
    for (int i = 1; i <= 7; i++) pf_push(32'd4000 + i);       // 1 taken, 4 queued, 2 dropped
    repeat (6 * (RAM_LAT + 6)) @(negedge clk);
    checks++;
    if (counters.pf_issued != 6 || counters.pf_dropped != 3) begin
      failures++; $display("FAIL prefetch counts issued %0d dropped %0d", counters.pf_issued, counters.pf_dropped);
    end
    // two simultaneous misses: one waits behind the other
    fork
      access(0, 32'd5000);
      access(1, 32'd5001);
    join
    checks++;
    if (counters.busy_stalls == 0) begin failures++; $display("FAIL no busy stall"); end
    $display("directed part done at cycle %0d", cycle);

    // ---- part 2: workload ----
    for (int t = 0; t < T; t++)
      for (int k = 0; k < N_PER_THREAD + 8; k++) wl[t][k] = tri_addr(1, 500);
    pf_drops_before = int'(counters.pf_dropped);
    t0 = cycle;
    wl_run = 1;
    fork
      run_thread(0);
      run_thread(1);
      run_thread(2);
      run_thread(3);
    join
    wl_run = 0;
    t1 = cycle;
    @(negedge clk); @(negedge clk);
    $display("workload: %0d accesses in %0d cycles; L1 misses %0d, L2 misses %0d, L3 misses %0d",
             T * N_PER_THREAD, t1 - t0, counters.l1_misses, counters.l2_misses, counters.l3_misses);

    // ---- counters against the monitor ----
    checks++;
    if (counters.accesses != n_resp || counters.l1_misses != n_miss ||
        counters.shared_hits != n_shared_hit || counters.evictions != n_evict || ram_reqs < n_ram) begin
      failures++;
      $display("FAIL counters: accesses %0d/%0d misses %0d/%0d shared %0d/%0d evictions %0d/%0d",
               counters.accesses, n_resp, counters.l1_misses, n_miss, counters.shared_hits, n_shared_hit,
               counters.evictions, n_evict);
    end
    // ---- every mechanism happened ----
    $display("own hits %0d, shared hits %0d, from L2 %0d, from L3 %0d, from memory %0d, evictions %0d",
             n_own_hit, n_shared_hit, n_l2, n_l3, n_ram, n_evict);
    $display("busy stalls %0d, prefetches loaded %0d, prefetches dropped %0d",
             counters.busy_stalls, counters.pf_issued, counters.pf_dropped);
    checks++; if (n_own_hit == 0)    begin failures++; $display("FAIL never: own hit"); end
    checks++; if (n_shared_hit == 0) begin failures++; $display("FAIL never: shared hit"); end
    checks++; if (n_l2 == 0)         begin failures++; $display("FAIL never: L2 hit"); end
    checks++; if (n_l3 == 0)         begin failures++; $display("FAIL never: L3 hit"); end
    checks++; if (n_ram == 0)        begin failures++; $display("FAIL never: memory access"); end
    checks++; if (n_evict == 0)      begin failures++; $display("FAIL never: eviction"); end
    checks++; if (counters.busy_stalls == 0) begin failures++; $display("FAIL never: busy stall"); end
    checks++; if (counters.pf_issued == 0)   begin failures++; $display("FAIL never: prefetch"); end
    checks++; if (int'(counters.pf_dropped) == pf_drops_before) $display("note: no prefetch dropped in the workload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
