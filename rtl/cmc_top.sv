// cmc_top: memory system of a single-core, four-thread processor whose L1 is
// shared by all threads on a hit but refilled per thread on a miss, the
// technique for reducing competitive cache misses.
//
// Each hardware thread presents one memory access at a time. A round-robin
// arbiter gives one thread per cycle the L1 lookup. A hit is answered in the
// next cycle, whichever thread's partition holds the block (counted as a
// shared hit when another thread owns it). A miss is handed to the miss
// controller, which walks L2, L3 and main memory and refills the block into
// the missing thread's own L1 partition only; the thread waits, the others
// keep using the L1. Only one miss is in flight; a miss met while another is
// served is refused and retried (a busy stall). A prefetch queue takes the
// addresses of upcoming memory instructions from the core's front end and has
// them loaded into L2, never into L1.
//
// Structure and sizes follow the source (4 threads, L1/L2/L3 of 128/256/512
// blocks, FIFO replacement, one outstanding miss, prefetch into L2). The
// processor core and main memory are outside: their connections are ports.
// The request/response protocol, arbitration and retry rule are this
// design's own.
//
// Interface and timing, per thread t:
//   req_valid[t], req_addr[t]: held from the request until resp_valid[t].
//   resp_valid[t]: one-cycle pulse with resp_data[t] and resp_src[t] (level
//   that held the block). An L1 hit answers 1 cycle after the lookup; a miss
//   answers when the refill is written. A thread's request is not looked up
//   in the cycle its response is shown, so it may present the next request
//   from the following cycle.
//   pf_in_valid/pf_in_addr: address of a decoded memory instruction.
//   mem_*: main memory, request valid/ready and response pulse.
module cmc_top
  import cmc_pkg::*;
#(
  parameter int unsigned THREADS = cmc_pkg::NUM_THREADS,
  parameter int unsigned L1_SIZE = cmc_pkg::L1_LINES,
  parameter int unsigned L2_SIZE = cmc_pkg::L2_LINES,
  parameter int unsigned L3_SIZE = cmc_pkg::L3_LINES,
  parameter int unsigned PF_Q    = cmc_pkg::PF_DEPTH
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // thread memory accesses
  input  logic [THREADS-1:0]     req_valid,
  input  logic [ADDR_W-1:0]      req_addr  [THREADS],
  output logic [THREADS-1:0]     resp_valid,
  output logic [DATA_W-1:0]      resp_data [THREADS],
  output src_e                   resp_src  [THREADS],
  // prefetch addresses from the core front end
  input  logic                   pf_in_valid,
  input  logic [ADDR_W-1:0]      pf_in_addr,
  // main memory
  output logic                   mem_req_valid,
  output logic [ADDR_W-1:0]      mem_req_addr,
  input  logic                   mem_req_ready,
  input  logic                   mem_resp_valid,
  input  logic [DATA_W-1:0]      mem_resp_data,
  // statistics
  output counters_t              counters
);
  localparam int unsigned TW = $clog2(THREADS);

  logic [THREADS-1:0] pending;     // thread waits for its miss
  logic               gnt_valid;
  logic [TW-1:0]      gnt;

  // ---------------- arbitration ----------------
  thread_arbiter #(.N(THREADS)) u_arb (
    .clk, .rst_n,
    .req      (req_valid & ~pending & ~resp_valid),
    .take     (gnt_valid),
    .gnt_valid(gnt_valid),
    .gnt_idx  (gnt)
  );

  // ---------------- L1 ----------------
  logic              lk_hit;
  logic [DATA_W-1:0] lk_data;
  logic [TW-1:0]     lk_owner;
  logic              fill_valid;
  logic [TW-1:0]     fill_tid;
  logic [ADDR_W-1:0] fill_addr;
  logic [DATA_W-1:0] fill_data;
  logic              victim_valid;
  logic [ADDR_W-1:0] victim_addr;   // observed by the monitor assertion below

  l1_partitioned_cache #(
    .THREADS(THREADS), .LINES(L1_SIZE), .ADDR_W(ADDR_W), .DATA_W(DATA_W)
  ) u_l1 (
    .clk, .rst_n,
    .lk_addr   (req_addr[gnt]),
    .lk_hit, .lk_data, .lk_owner,
    .fill_valid, .fill_tid, .fill_addr, .fill_data,
    .fill_victim_valid(victim_valid),
    .fill_victim_addr (victim_addr)
  );

  // ---------------- prefetch queue ----------------
  logic              pf_valid, pf_ready;
  logic [ADDR_W-1:0] pf_addr;
  logic [$clog2(PF_Q):0] pf_count;
  logic [CNT_W-1:0]  pf_full_drops;

  prefetcher #(.DEPTH(PF_Q), .ADDR_W(ADDR_W), .CNT_W(CNT_W)) u_pf (
    .clk, .rst_n,
    .in_valid(pf_in_valid), .in_addr(pf_in_addr),
    .pf_valid, .pf_addr, .pf_ready,
    .count(pf_count), .dropped(pf_full_drops)
  );

  // ---------------- miss controller with L2 and L3 ----------------
  logic              dm_valid, dm_ready;
  src_e              fill_src;
  logic [CNT_W-1:0]  pf_present;
  logic              mc_busy;

  assign dm_valid = gnt_valid && !lk_hit;

  miss_controller #(
    .THREADS(THREADS), .L2_SIZE(L2_SIZE), .L3_SIZE(L3_SIZE)
  ) u_mc (
    .clk, .rst_n,
    .dm_valid, .dm_tid(gnt), .dm_addr(req_addr[gnt]), .dm_ready,
    .pf_valid, .pf_addr, .pf_ready,
    .l1_fill_valid(fill_valid), .l1_fill_tid(fill_tid),
    .l1_fill_addr(fill_addr), .l1_fill_data(fill_data),
    .resp_src(fill_src),
    .mem_req_valid, .mem_req_addr, .mem_req_ready,
    .mem_resp_valid, .mem_resp_data,
    .l1_misses (counters.l1_misses),
    .l2_misses (counters.l2_misses),
    .l3_misses (counters.l3_misses),
    .pf_issued (counters.pf_issued),
    .pf_present(pf_present),
    .busy      (mc_busy)
  );

  assign counters.pf_dropped = pf_present + pf_full_drops;

  // ---------------- responses and bookkeeping ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending                <= '0;
      resp_valid             <= '0;
      counters.accesses      <= '0;
      counters.shared_hits   <= '0;
      counters.busy_stalls   <= '0;
      counters.evictions     <= '0;
      for (int unsigned t = 0; t < THREADS; t++) begin
        resp_data[t] <= '0;
        resp_src[t]  <= SRC_L1;
      end
    end else begin
      resp_valid <= '0;
      if (gnt_valid && lk_hit) begin
        resp_valid[gnt]   <= 1'b1;
        resp_data[gnt]    <= lk_data;
        resp_src[gnt]     <= SRC_L1;
        counters.accesses <= counters.accesses + 1'b1;
        if (lk_owner != gnt) counters.shared_hits <= counters.shared_hits + 1'b1;
      end else if (dm_valid && dm_ready) begin
        pending[gnt]      <= 1'b1;
        counters.accesses <= counters.accesses + 1'b1;
      end else if (dm_valid) begin
        counters.busy_stalls <= counters.busy_stalls + 1'b1;
      end
      if (fill_valid) begin
        if (victim_valid) counters.evictions <= counters.evictions + 1'b1;
        pending[fill_tid]    <= 1'b0;
        resp_valid[fill_tid] <= 1'b1;
        resp_data[fill_tid]  <= fill_data;
        resp_src[fill_tid]   <= fill_src;
      end
    end
  end

  // A refill never evicts the block it brings in (no duplicate blocks); that
  // the victim is the refilling thread's own is asserted inside the L1.
  assert property (@(posedge clk) disable iff (!rst_n)
                   fill_valid && victim_valid |-> victim_addr != fill_addr);

  // A refill answers the thread whose miss it is; no thread gets two answers.
  assert property (@(posedge clk) disable iff (!rst_n) fill_valid |-> pending[fill_tid]);
  assert property (@(posedge clk) disable iff (!rst_n)
                   fill_valid && gnt_valid && lk_hit |-> gnt != fill_tid);

endmodule
