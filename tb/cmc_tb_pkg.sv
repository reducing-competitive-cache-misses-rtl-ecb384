// cmc_tb_pkg: helpers shared by the testbenches: the data word the memory
// model holds at each address, and a triangular address distribution like
// the one of the reference workload (addresses 1..500, peak in the middle).
package cmc_tb_pkg;

  function automatic logic [31:0] mem_data(input logic [31:0] addr);
    return (addr * 32'h9E37_79B1) ^ 32'h5A5A_5A5A;
  endfunction

  // Triangular distribution over lo..hi with the mode in the middle:
  // the mean of two uniform draws.
  function automatic logic [31:0] tri_addr(input int unsigned lo, input int unsigned hi);
    int unsigned span = hi - lo + 1;
    int unsigned a    = $urandom % span;
    int unsigned b    = $urandom % span;
    return 32'(lo + (a + b) / 2);
  endfunction

endpackage
