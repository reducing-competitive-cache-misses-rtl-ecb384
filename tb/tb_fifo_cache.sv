// tb_fifo_cache: checks the FIFO-replacement caches used as L2 (256 lines)
// and L3 (512 lines) against a reference list model: refills append, and once
// the list is full the oldest block goes. Both sizes run side by side on the
// same stimulus: a directed overfill by one line, then random refills of
// fresh addresses mixed with lookups; hit, data and occupancy are compared.
module tb_fifo_cache;
  import cmc_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] lk_addr;
  logic        fill_valid;
  logic [31:0] fill_addr, fill_data;
  logic        hit2, hit3;
  logic [31:0] data2, data3;
  logic [8:0]  occ2;
  logic [9:0]  occ3;
  int checks = 0, failures = 0;
  logic [31:0] m2 [$], m3 [$];
  logic [31:0] next_addr = 32'h40;

  fifo_cache                dut2 (.clk, .rst_n, .lk_addr, .lk_hit(hit2), .lk_data(data2),
                                  .fill_valid, .fill_addr, .fill_data, .occupancy(occ2));
  fifo_cache #(.LINES(512)) dut3 (.clk, .rst_n, .lk_addr, .lk_hit(hit3), .lk_data(data3),
                                  .fill_valid, .fill_addr, .fill_data, .occupancy(occ3));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit in_q(ref logic [31:0] q [$], input logic [31:0] a);
    foreach (q[i]) if (q[i] == a) return 1;
    return 0;
  endfunction

  task automatic do_fill();
    fill_valid = 1; fill_addr = next_addr; fill_data = mem_data(next_addr);
    if (m2.size() == 256) void'(m2.pop_front());
    if (m3.size() == 512) void'(m3.pop_front());
    m2.push_back(next_addr); m3.push_back(next_addr);
    next_addr++;
    @(negedge clk);
    fill_valid = 0;
    checks++;
    if (int'(occ2) != m2.size() || int'(occ3) != m3.size()) begin
      failures++; $display("FAIL occupancy %0d/%0d exp %0d/%0d", occ2, occ3, m2.size(), m3.size());
    end
  endtask

  task automatic do_lookup(input logic [31:0] a);
    bit e2, e3;
    lk_addr = a;
    #1;
    e2 = in_q(m2, a); e3 = in_q(m3, a);
    checks++;
    if (hit2 !== e2 || hit3 !== e3 || (e2 && data2 != mem_data(a)) || (e3 && data3 != mem_data(a))) begin
      failures++;
      $display("FAIL lookup %h: L2 %b/%h exp %b, L3 %b/%h exp %b", a, hit2, data2, e2, hit3, data3, e3);
    end
    @(negedge clk);
  endtask

  initial begin
    fill_valid = 0; fill_addr = 0; fill_data = 0; lk_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    repeat (257) do_fill();            // L2 overflows by one, L3 not
    do_lookup(32'h40);                 // oldest: gone from L2, still in L3
    checks++;
    if (hit2 || !hit3) begin failures++; $display("FAIL oldest block after L2 overflow"); end
    do_lookup(32'h41);
    for (int i = 0; i < 12000; i++) begin
      if ($urandom % 3 == 0) do_fill();
      else do_lookup(32'h40 + ($urandom % (next_addr - 32'h40 + 2)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
