// tb_prefetch_sweep: the prefetch-depth sweep of the evaluation (2 to 16
// prefetched memory instructions), run on the memory system. Eight lanes,
// each a full system with its own prefetch queue depth, run the same
// single-thread program of 1000 memory accesses side by side; the table of
// L1 and L2 misses, prefetches and cycles per depth is printed. Each lane checks the
// data of every access; the testbench also checks that deeper queues loaded
// prefetches at all and that every lane finished.
module tb_prefetch_sweep;
  localparam int NL = 8;
  localparam int unsigned DEPTHS [NL] = '{2, 4, 6, 8, 10, 12, 14, 16};
  logic clk = 0, rst_n = 0;
  logic        done [NL];
  int unsigned cycles [NL], misses [NL], misses2 [NL], loaded [NL];
  int          lchecks [NL], lfail [NL];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < NL; i++) begin : g_lane
    sweep_lane #(.PF_Q(DEPTHS[i]), .N(1000)) u_lane (
      .clk, .rst_n, .done(done[i]), .cycles(cycles[i]), .l1_misses(misses[i]), .l2_misses(misses2[i]),
      .pf_loaded(loaded[i]), .checks(lchecks[i]), .failures(lfail[i])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_done();
    for (int i = 0; i < NL; i++) if (!done[i]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!all_done()) @(negedge clk);
    $display("prefetch depth | L1 misses | L2 misses | prefetches loaded | cycles");
    for (int i = 0; i < NL; i++) begin
      $display("%14d | %9d | %9d | %17d | %0d", DEPTHS[i], misses[i], misses2[i], loaded[i], cycles[i]);
      checks += lchecks[i]; failures += lfail[i];
      checks++;
      if (loaded[i] == 0) begin failures++; $display("FAIL depth %0d loaded no prefetch", DEPTHS[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
