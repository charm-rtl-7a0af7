// mem_model: behavioural stand-in for the off-chip DDR memory and its
// controller, for simulation only.
//
// A word-addressed array of WORDS 32-bit words with one read channel and one
// write channel. A read request taken on rd_valid && rd_ready is answered
// LAT cycles later on rresp_valid/rresp_data, in order. Writes take effect on
// wr_valid && wr_ready. With STALL set, rd_ready and wr_ready drop at random
// (one cycle in four) to exercise back-pressure. The testbench reaches `mem`
// by hierarchical reference to fill and inspect it.
module mem_model
  import charm_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 16,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic  clk,
  input  logic  rd_valid,
  output logic  rd_ready,
  input  addr_t rd_addr,
  output logic  rresp_valid,
  output data_t rresp_data,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  addr_t wr_addr,
  input  data_t wr_data
);
  data_t mem [WORDS];
  logic  pv [LAT];
  data_t pd [LAT];
  int unsigned reads, writes;

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    rd_ready = 1'b1;
    wr_ready = 1'b1;
    reads = 0;
    writes = 0;
  end

  assign rresp_valid = pv[LAT-1];
  assign rresp_data  = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT-1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rd_valid && rd_ready;
    pd[0] <= (rd_addr < WORDS) ? mem[rd_addr] : '0;
    if (rd_valid && rd_ready) reads++;
    if (wr_valid && wr_ready) begin
      if (wr_addr < WORDS) mem[wr_addr] <= wr_data;
      writes++;
    end
    rd_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
    wr_ready <= STALL ? ($urandom_range(3) != 0) : 1'b1;
  end
endmodule
