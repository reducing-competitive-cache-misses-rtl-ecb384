// sweep_lane: one point of the prefetch-depth sweep. It holds a complete
// memory system (cmc_top with prefetch queue depth PF_Q) and a 60-cycle memory
// model, and runs one thread through N memory accesses. Between two memory
// instructions the thread executes a random number of other instructions, one
// per cycle, each being a memory access with probability 22.5 %. Addresses are
// triangular over 1..500. When the thread starts access k it offers the
// address of access k + PF_Q to the prefetch queue, so PF_Q is the number of
// memory instructions prefetched ahead. A linear congruential generator with
// a fixed seed makes every lane see the same program. The lane checks every
// response's data and, at the end, that the access counter matches; it then
// raises done with its counts. Prefetches go to L2 only, so they can lower
// the L2 misses and the cycle count but not the L1 misses.
module sweep_lane #(
  parameter int unsigned PF_Q = 4,
  parameter int unsigned N    = 1000
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        done,
  output int unsigned cycles,
  output int unsigned l1_misses,
  output int unsigned l2_misses,
  output int unsigned pf_loaded,
  output int          checks,
  output int          failures
);
  import cmc_pkg::*;
  import cmc_tb_pkg::*;

  logic [3:0]   req_valid, resp_valid;
  logic [31:0]  req_addr [4];
  logic [31:0]  resp_data [4];
  src_e         resp_src [4];
  logic         pf_in_valid;
  logic [31:0]  pf_in_addr;
  logic         mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0]  mem_req_addr, mem_resp_data;
  counters_t    counters;
  int unsigned  ram_reqs;

  cmc_top #(.PF_Q(PF_Q)) dut (.*);

  ram_model #(.LAT(RAM_LAT)) u_ram (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_addr(mem_req_addr),
    .req_ready(mem_req_ready), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .requests(ram_reqs)
  );

  logic [31:0] lcg = 32'd12345;
  function automatic int unsigned rnd(input int unsigned m);
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return (lcg >> 8) % m;
  endfunction

  logic [31:0] prog [N + PF_Q];
  int unsigned gap  [N];

  initial begin
    done = 0; checks = 0; failures = 0; cycles = 0; l1_misses = 0; l2_misses = 0; pf_loaded = 0;
    req_valid = '0; pf_in_valid = 0; pf_in_addr = 0;
    for (int t = 0; t < 4; t++) req_addr[t] = 0;
    for (int k = 0; k < N + PF_Q; k++) prog[k] = 32'(1 + (rnd(500) + rnd(500)) / 2);
    for (int k = 0; k < N; k++) begin
      gap[k] = 0;
      while (rnd(1000) >= 225) gap[k]++;
    end
    @(posedge rst_n);
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      int unsigned c0;
      pf_in_valid = 1; pf_in_addr = prog[k + PF_Q];
      req_valid[0] = 1; req_addr[0] = prog[k];
      @(negedge clk);
      pf_in_valid = 0;
      c0 = 0;
      while (!resp_valid[0] && c0 < 10000) begin @(negedge clk); c0++; end
      checks++;
      if (!resp_valid[0] || resp_data[0] != mem_data(prog[k])) begin
        failures++;
        $display("FAIL PF_Q=%0d access %0d addr %0d", PF_Q, k, prog[k]);
      end
      req_valid[0] = 0;
      repeat (gap[k]) @(negedge clk);
      cycles += c0 + 1 + gap[k];
    end
    repeat (2) @(negedge clk);
    checks++;
    if (counters.accesses != N) begin failures++; $display("FAIL PF_Q=%0d accesses %0d", PF_Q, counters.accesses); end
    l1_misses = counters.l1_misses;
    l2_misses = counters.l2_misses;
    pf_loaded = counters.pf_issued;
    done = 1;
  end
endmodule
