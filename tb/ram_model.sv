// ram_model: behavioural model of the main memory behind the L3 (not
// synthesizable logic of the design; an external DRAM stands here). It takes
// one request at a time (req_ready is high while idle), and LAT cycles after
// the request was taken it shows resp_valid for one cycle with the data word
// of that address, cmc_tb_pkg::mem_data(addr). LAT defaults to 60 cycles,
// the memory access time of the original authors' simulator.
module ram_model #(
  parameter int unsigned LAT = 60
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  logic [31:0] req_addr,
  output logic        req_ready,
  output logic        resp_valid,
  output logic [31:0] resp_data,
  output int unsigned requests
);
  int unsigned cnt;
  logic        busy;
  logic [31:0] addr_q;

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      cnt        <= 0;
      addr_q     <= '0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      requests   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy     <= 1'b1;
        addr_q   <= req_addr;
        cnt      <= LAT - 1;
        requests <= requests + 1;
      end else if (busy) begin
        if (cnt == 1) begin
          resp_valid <= 1'b1;
          resp_data  <= cmc_tb_pkg::mem_data(addr_q);
        end
        if (cnt == 0) busy <= 1'b0;
        else          cnt  <= cnt - 1;
      end
    end
  end

endmodule
