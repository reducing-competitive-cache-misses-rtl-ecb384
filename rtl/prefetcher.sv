// prefetcher: holds the addresses of upcoming memory instructions and hands
// them, oldest first, to the miss controller, which loads each block early
// into L2.
//
// The source keeps prefetching but moves its target from L1 to L2, so that
// early loads do not evict blocks other threads are using in L1; it finds the
// fewest misses when 4 to 6 memory instructions are prefetched ahead. Here
// that look-ahead is the queue depth DEPTH (default 4): the core front end
// presents the address of each memory instruction as it is decoded, and at
// most DEPTH of them wait to be prefetched. When the queue is full a new
// address is dropped and counted. How addresses are predicted, the queue and
// the drop rule are this design's own choices; the source does not give them.
//
// Interface and timing:
//   in_valid/in_addr : address of a decoded memory instruction, taken at the
//                      rising edge (no back-pressure; dropped when full).
//   pf_valid/pf_addr/pf_ready : oldest queued address to the miss controller,
//                      popped at the edge where pf_valid & pf_ready.
//   count, dropped   : queue fill level and number of dropped addresses.
module prefetcher #(
  parameter int unsigned DEPTH  = cmc_pkg::PF_DEPTH,
  parameter int unsigned ADDR_W = cmc_pkg::ADDR_W,
  parameter int unsigned CNT_W  = cmc_pkg::CNT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [ADDR_W-1:0]      in_addr,
  output logic                   pf_valid,
  output logic [ADDR_W-1:0]      pf_addr,
  input  logic                   pf_ready,
  output logic [$clog2(DEPTH):0] count,
  output logic [CNT_W-1:0]       dropped
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [ADDR_W-1:0] q [DEPTH];
  logic [AW-1:0]     rd_ptr, wr_ptr;
  logic              push, pop;

  assign pf_valid = (count != '0);
  assign pf_addr  = q[rd_ptr];
  assign pop      = pf_valid && pf_ready;
  // A slot freed by a pop in the same cycle can be reused at once.
  assign push     = in_valid && (count != ($clog2(DEPTH)+1)'(DEPTH) || pop);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      wr_ptr  <= '0;
      count   <= '0;
      dropped <= '0;
    end else begin
      if (push) wr_ptr <= AW'((int'(wr_ptr) + 1) % DEPTH);
      if (pop)  rd_ptr <= AW'((int'(rd_ptr) + 1) % DEPTH);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (in_valid && !push) dropped <= dropped + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[wr_ptr] <= in_addr;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   count <= ($clog2(DEPTH)+1)'(DEPTH));

endmodule
