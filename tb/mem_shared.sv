// mem_shared: behavioural stand-in for the shared off-chip DDR memory seen
// through the network-on-chip, for simulation only.
//
// One word-addressed array of WORDS 32-bit words served by NCH independent
// channels (one per accelerator). Each channel answers its read requests LAT
// cycles later, in order, and applies writes when wr_valid && wr_ready. With
// STALL set, each channel's ready signals drop at random one cycle in four.
// The testbench fills and inspects `mem` by hierarchical reference.
module mem_shared
  import charm_pkg::*;
#(
  parameter int unsigned WORDS = 1 << 16,
  parameter int unsigned NCH   = 6,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic            clk,
  input  logic [NCH-1:0]  rd_valid,
  output logic [NCH-1:0]  rd_ready,
  input  addr_t           rd_addr [NCH],
  output logic [NCH-1:0]  rresp_valid,
  output data_t           rresp_data [NCH],
  input  logic [NCH-1:0]  wr_valid,
  output logic [NCH-1:0]  wr_ready,
  input  addr_t           wr_addr [NCH],
  input  data_t           wr_data [NCH]
);
  data_t mem [WORDS];
  logic  pv [NCH][LAT];
  data_t pd [NCH][LAT];

  initial begin
    for (int c = 0; c < NCH; c++)
      for (int i = 0; i < LAT; i++) begin pv[c][i] = 1'b0; pd[c][i] = '0; end
    rd_ready = '1;
    wr_ready = '1;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign rresp_valid[c] = pv[c][LAT-1];
    assign rresp_data[c]  = pd[c][LAT-1];
  end

  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      for (int i = LAT-1; i > 0; i--) begin pv[c][i] <= pv[c][i-1]; pd[c][i] <= pd[c][i-1]; end
      pv[c][0] <= rd_valid[c] && rd_ready[c];
      pd[c][0] <= (rd_addr[c] < WORDS) ? mem[rd_addr[c]] : '0;
      if (wr_valid[c] && wr_ready[c] && wr_addr[c] < WORDS) mem[wr_addr[c]] <= wr_data[c];
      rd_ready[c] <= STALL ? ($urandom_range(3) != 0) : 1'b1;
      wr_ready[c] <= STALL ? ($urandom_range(3) != 0) : 1'b1;
    end
  end
endmodule
