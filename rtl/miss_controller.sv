// miss_controller: serves L1 misses and L2 prefetches through the lower
// levels of the hierarchy (L2, L3, main memory), one request at a time.
//
// Follows the original authors' simulator's cache process: a missing block is looked
// for in L2, then L3, then RAM, and is copied into every level above the one
// that had it (found in L2: fill L1; in L3: fill L2 and L1; in RAM: fill L3,
// L2 and L1). Only one miss is handled at a time (the simulator's memory
// pipeline of 1). The access time depends on where the block was found:
// L2_LAT, L3_LAT, or the memory's own latency. A prefetch brings the block
// into L2 (and L3 when it comes from RAM) but never into L1, so that early
// loads do not compete for the first level; a prefetch of a block already in
// L2 is dropped. A waiting demand miss is always accepted before a prefetch.
// The L2 and L3 arrays are instantiated here. Miss counts per level are kept
// for demand accesses only, like the simulator's miss counter.
//
// Interface and timing (all handshakes valid/ready, sampled at rising edges):
//   dm_*  : demand miss (thread, address) in; accepted when dm_valid & dm_ready.
//   pf_*  : prefetch address in; accepted when pf_valid & pf_ready (idle and
//           no demand miss waiting).
//   l1_fill_*, resp_* : one-cycle pulse when a demand miss completes; the
//           block is written to L1 at the same edge. resp_src says which level
//           held it. From acceptance to the response: L2_LAT + 2 cycles for an
//           L2 hit, L3_LAT + 2 for an L3 hit, memory latency + 3 (plus the
//           memory's wait for ready) for RAM.
//   mem_* : request to main memory (valid/ready) and its response pulse.
module miss_controller
  import cmc_pkg::*;
#(
  parameter int unsigned THREADS   = cmc_pkg::NUM_THREADS,
  parameter int unsigned L2_SIZE   = cmc_pkg::L2_LINES,
  parameter int unsigned L3_SIZE   = cmc_pkg::L3_LINES,
  parameter int unsigned L2_CYCLES = cmc_pkg::L2_LAT,
  parameter int unsigned L3_CYCLES = cmc_pkg::L3_LAT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // demand miss from the L1 side
  input  logic                       dm_valid,
  input  logic [$clog2(THREADS)-1:0] dm_tid,
  input  logic [ADDR_W-1:0]          dm_addr,
  output logic                       dm_ready,
  // prefetch
  input  logic                       pf_valid,
  input  logic [ADDR_W-1:0]          pf_addr,
  output logic                       pf_ready,
  // refill of L1 and response to the thread
  output logic                       l1_fill_valid,
  output logic [$clog2(THREADS)-1:0] l1_fill_tid,
  output logic [ADDR_W-1:0]          l1_fill_addr,
  output logic [DATA_W-1:0]          l1_fill_data,
  output src_e                       resp_src,
  // main memory
  output logic                       mem_req_valid,
  output logic [ADDR_W-1:0]          mem_req_addr,
  input  logic                       mem_req_ready,
  input  logic                       mem_resp_valid,
  input  logic [DATA_W-1:0]          mem_resp_data,
  // statistics
  output logic [CNT_W-1:0]           l1_misses,
  output logic [CNT_W-1:0]           l2_misses,
  output logic [CNT_W-1:0]           l3_misses,
  output logic [CNT_W-1:0]           pf_issued,
  output logic [CNT_W-1:0]           pf_present,
  output logic                       busy
);
  localparam int unsigned TW = $clog2(THREADS);
  localparam int unsigned CW = $clog2((L3_CYCLES > L2_CYCLES ? L3_CYCLES : L2_CYCLES) + 1);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_WAIT, S_MEM_REQ, S_MEM_WAIT, S_FILL
  } state_e;

  state_e            state;
  logic              is_pf;
  logic [TW-1:0]     cur_tid;
  logic [ADDR_W-1:0] cur_addr;
  logic [DATA_W-1:0] cur_data;
  src_e              cur_src;
  logic [CW-1:0]     wait_cnt;

  // ---------------- L2 and L3 ----------------
  logic              l2_hit, l3_hit;
  logic [DATA_W-1:0] l2_data, l3_data;
  logic              l2_fill, l3_fill;
  logic [$clog2(L2_SIZE):0] l2_occ;
  logic [$clog2(L3_SIZE):0] l3_occ;

  fifo_cache #(.LINES(L2_SIZE), .ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_l2 (
    .clk, .rst_n,
    .lk_addr(cur_addr), .lk_hit(l2_hit), .lk_data(l2_data),
    .fill_valid(l2_fill), .fill_addr(cur_addr), .fill_data(cur_data),
    .occupancy(l2_occ)
  );

  fifo_cache #(.LINES(L3_SIZE), .ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_l3 (
    .clk, .rst_n,
    .lk_addr(cur_addr), .lk_hit(l3_hit), .lk_data(l3_data),
    .fill_valid(l3_fill), .fill_addr(cur_addr), .fill_data(cur_data),
    .occupancy(l3_occ)
  );

  // ---------------- handshakes and fills ----------------
  assign dm_ready      = (state == S_IDLE);
  assign pf_ready      = (state == S_IDLE) && !dm_valid;
  assign busy          = (state != S_IDLE);
  assign mem_req_valid = (state == S_MEM_REQ);
  assign mem_req_addr  = cur_addr;

  assign l3_fill       = (state == S_FILL) && (cur_src == SRC_RAM);
  assign l2_fill       = (state == S_FILL) && (cur_src == SRC_RAM || cur_src == SRC_L3);
  assign l1_fill_valid = (state == S_FILL) && !is_pf;
  assign l1_fill_tid   = cur_tid;
  assign l1_fill_addr  = cur_addr;
  assign l1_fill_data  = cur_data;
  assign resp_src      = cur_src;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      is_pf      <= 1'b0;
      cur_tid    <= '0;
      cur_addr   <= '0;
      cur_data   <= '0;
      cur_src    <= SRC_L2;
      wait_cnt   <= '0;
      l1_misses  <= '0;
      l2_misses  <= '0;
      l3_misses  <= '0;
      pf_issued  <= '0;
      pf_present <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (dm_valid) begin
            is_pf     <= 1'b0;
            cur_tid   <= dm_tid;
            cur_addr  <= dm_addr;
            l1_misses <= l1_misses + 1'b1;
            state     <= S_LOOKUP;
          end else if (pf_valid) begin
            is_pf     <= 1'b1;
            cur_addr  <= pf_addr;
            state     <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (l2_hit) begin
            if (is_pf) begin
              pf_present <= pf_present + 1'b1;   // already where it should go
              state      <= S_IDLE;
            end else begin
              cur_src  <= SRC_L2;
              cur_data <= l2_data;
              wait_cnt <= CW'(L2_CYCLES - 1);
              state    <= S_WAIT;
            end
          end else begin
            if (!is_pf) l2_misses <= l2_misses + 1'b1;
            if (l3_hit) begin
              cur_src  <= SRC_L3;
              cur_data <= l3_data;
              wait_cnt <= CW'(L3_CYCLES - 1);
              state    <= S_WAIT;
            end else begin
              if (!is_pf) l3_misses <= l3_misses + 1'b1;
              cur_src <= SRC_RAM;
              state   <= S_MEM_REQ;
            end
          end
        end
        S_WAIT: begin
          if (wait_cnt == '0) state <= S_FILL;
          else                wait_cnt <= wait_cnt - 1'b1;
        end
        S_MEM_REQ: begin
          if (mem_req_ready) state <= S_MEM_WAIT;
        end
        S_MEM_WAIT: begin
          if (mem_resp_valid) begin
            cur_data <= mem_resp_data;
            state    <= S_FILL;
          end
        end
        S_FILL: begin
          if (is_pf) pf_issued <= pf_issued + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));
  assert property (@(posedge clk) disable iff (!rst_n)
                   l1_fill_valid |-> cur_src != SRC_L1);

endmodule
