// fifo_cache: fully associative cache with first-in first-out replacement,
// used for the second (256 lines) and third (512 lines) cache levels.
//
// Behaviour follows the original authors' simulator's cache lists: a lookup searches
// every line; a refill goes to a free line while one is left, otherwise it
// replaces the oldest block (delete the first entry, append the new one). A
// single wrap-around pointer gives exactly that order. One block is one
// address and its data word. Unlike the L1, these levels are not partitioned
// by thread.
//
// Interface and timing:
//   lookup: lk_addr in; lk_hit, lk_data out, combinational from the array.
//   refill: fill_valid, fill_addr, fill_data sampled at the rising edge; the
//           caller must not refill an address that is already present.
//   occupancy: number of valid lines (saturates at LINES).
module fifo_cache #(
  parameter int unsigned LINES  = cmc_pkg::L2_LINES,
  parameter int unsigned ADDR_W = cmc_pkg::ADDR_W,
  parameter int unsigned DATA_W = cmc_pkg::DATA_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [ADDR_W-1:0]      lk_addr,
  output logic                   lk_hit,
  output logic [DATA_W-1:0]      lk_data,
  input  logic                   fill_valid,
  input  logic [ADDR_W-1:0]      fill_addr,
  input  logic [DATA_W-1:0]      fill_data,
  output logic [$clog2(LINES):0] occupancy
);
  localparam int unsigned LW = $clog2(LINES);

  logic [LINES-1:0]  valid;
  logic [ADDR_W-1:0] tag_q  [LINES];
  logic [DATA_W-1:0] data_q [LINES];
  logic [LW-1:0]     ptr;   // oldest line, next to be replaced

  always_comb begin
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int unsigned i = 0; i < LINES; i++) begin
      if (valid[i] && tag_q[i] == lk_addr) begin
        lk_hit  = 1'b1;
        lk_data = data_q[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid     <= '0;
      ptr       <= '0;
      occupancy <= '0;
    end else if (fill_valid) begin
      valid[ptr] <= 1'b1;
      ptr        <= LW'((int'(ptr) + 1) % LINES);
      if (!valid[ptr]) occupancy <= occupancy + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag_q[ptr]  <= fill_addr;
      data_q[ptr] <= fill_data;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   fill_valid |-> !(lk_hit && lk_addr == fill_addr));

endmodule
