// l1_partitioned_cache: first-level cache shared by all hardware threads for
// lookups, but refilled only inside the requesting thread's own partition.
//
// This is the replacement technique the design is built around. The LINES
// lines are split into THREADS equal "virtual" partitions. A lookup compares
// the address with every line, whoever owns it, so a thread hits on data any
// other thread brought in. A refill after a miss writes only a line of the
// requester's partition, so one thread's misses never evict another thread's
// blocks. Inside a partition the victim is chosen first-in first-out, which is
// the replacement of the original authors' simulator (oldest entry deleted, new one
// appended); invalid lines are used first because the FIFO pointer starts at
// the partition base after reset. Every line carries an owner-thread tag,
// written at refill, which is reported on a hit and checked by an assertion
// at refill (the victim must be free or already the requester's).
//
// Fully associative, one block (one address, one data word) per line, as in
// the original authors' simulator. Equal static partitions and the FIFO policy follow
// the source; the port protocol is this design's own.
//
// Interface and timing:
//   lookup: lk_addr in; lk_hit, lk_data, lk_owner out, combinational from the
//           array state (the refill of the same cycle is visible next cycle).
//   refill: fill_valid, fill_tid, fill_addr, fill_data sampled at the rising
//           clock edge; the line is valid from the next cycle. The caller must
//           not refill an address that is already present.
//   fill_victim_valid/fill_victim_addr: the block a refill in this cycle
//           would evict (combinational, for monitoring).
module l1_partitioned_cache #(
  parameter int unsigned THREADS = cmc_pkg::NUM_THREADS,
  parameter int unsigned LINES   = cmc_pkg::L1_LINES,
  parameter int unsigned ADDR_W  = cmc_pkg::ADDR_W,
  parameter int unsigned DATA_W  = cmc_pkg::DATA_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // lookup
  input  logic [ADDR_W-1:0]          lk_addr,
  output logic                       lk_hit,
  output logic [DATA_W-1:0]          lk_data,
  output logic [$clog2(THREADS)-1:0] lk_owner,
  // refill
  input  logic                       fill_valid,
  input  logic [$clog2(THREADS)-1:0] fill_tid,
  input  logic [ADDR_W-1:0]          fill_addr,
  input  logic [DATA_W-1:0]          fill_data,
  output logic                       fill_victim_valid,
  output logic [ADDR_W-1:0]          fill_victim_addr
);
  localparam int unsigned TW   = $clog2(THREADS);
  localparam int unsigned PART = LINES / THREADS;   // lines per thread
  localparam int unsigned PW   = $clog2(PART);
  localparam int unsigned LW   = $clog2(LINES);

  logic [LINES-1:0]  valid;
  logic [ADDR_W-1:0] tag_q   [LINES];
  logic [DATA_W-1:0] data_q  [LINES];
  logic [TW-1:0]     owner_q [LINES];
  logic [PW-1:0]     fifo_ptr [THREADS];  // next victim within each partition

  // ---------------- lookup over the whole cache ----------------
  always_comb begin
    lk_hit   = 1'b0;
    lk_data  = '0;
    lk_owner = '0;
    for (int unsigned i = 0; i < LINES; i++) begin
      if (valid[i] && tag_q[i] == lk_addr) begin
        lk_hit   = 1'b1;
        lk_data  = data_q[i];
        lk_owner = owner_q[i];
      end
    end
  end

  // ---------------- victim inside the requester's partition ----------------
  logic [LW-1:0] victim;
  assign victim            = LW'(fill_tid) * LW'(PART) + LW'(fifo_ptr[fill_tid]);
  assign fill_victim_valid = valid[victim];
  assign fill_victim_addr  = tag_q[victim];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int unsigned t = 0; t < THREADS; t++) fifo_ptr[t] <= '0;
    end else if (fill_valid) begin
      valid[victim]      <= 1'b1;
      fifo_ptr[fill_tid] <= PW'((int'(fifo_ptr[fill_tid]) + 1) % PART);
    end
  end

  // Array contents need no reset: a line is only read when its valid bit is set.
  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_q[victim]   <= fill_addr;
      data_q[victim]  <= fill_data;
      owner_q[victim] <= fill_tid;
    end
  end

  // The owner tag divides the cache: a refill may only take a free line or a
  // line the requesting thread already owns, and never duplicates a block.
  assert property (@(posedge clk) disable iff (!rst_n)
                   fill_valid |-> (!valid[victim] || owner_q[victim] == fill_tid));
  assert property (@(posedge clk) disable iff (!rst_n)
                   fill_valid |-> !(lk_hit && lk_addr == fill_addr));

  initial begin
    assert (LINES % THREADS == 0 && PART >= 2)
      else $error("LINES must split into equal partitions of at least 2 lines");
  end

endmodule
