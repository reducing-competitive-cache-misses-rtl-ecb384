// thread_arbiter: round-robin choice among the hardware threads that want the
// shared L1 lookup port in a cycle.
//
// All threads compete for the one L1; the source only says they access it
// "competitively", so the fairness rule is this design's choice: rotating
// priority. The thread granted in a cycle gets the lowest priority in the next
// cycle in which a grant is taken (gnt_valid & take).
//
// Interface: req[N] in; gnt_valid, gnt_idx (thread number) out, combinational
// from req and the priority pointer. take: the grant was used this cycle and
// the pointer moves past gnt_idx at the next rising clock edge.
module thread_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 take,
  output logic                 gnt_valid,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] prio;  // thread with the highest priority this cycle

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int unsigned k = 0; k < N; k++) begin
      automatic int unsigned t = (int'(prio) + k) % N;
      if (!gnt_valid && req[t]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(t);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      prio <= '0;
    else if (gnt_valid && take)
      prio <= IW'((int'(gnt_idx) + 1) % N);
  end

  assert property (@(posedge clk) disable iff (!rst_n) gnt_valid |-> req[gnt_idx]);

endmodule
