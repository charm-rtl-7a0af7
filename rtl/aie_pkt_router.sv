// aie_pkt_router: packet-switched scatter of one PLIO input port.
//
// One PL-to-AIE port is shared by up to NDEST destinations by time
// multiplexing, as the AIE stream switch does in packet-switched mode. The
// first beat of every packet is a header whose low bits hold the destination
// ID; the router latches it and forwards the remaining beats, up to and
// including the one flagged `last`, to that destination. The header beat is
// consumed here. Destinations whose ID exceeds NDEST-1 are dropped.
// Interface: valid/ready on the input and on each output; out_beat is shared.
// Timing: combinational pass-through of payload beats, one cycle to take a
// header, so a packet of P payload words occupies the port for P+1 cycles.
// The header-first packet format follows the paper; the header encoding (ID
// in the low bits of the word) is this design's choice.
module aie_pkt_router
  import charm_pkg::*;
#(
  parameter int unsigned NDEST = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  output logic [NDEST-1:0]  out_valid,
  input  logic [NDEST-1:0]  out_ready,
  output beat_t             out_beat
);
  localparam int unsigned IDW = (NDEST > 1) ? $clog2(NDEST) : 1;

  logic           in_pkt;   // header taken, payload flowing
  logic [IDW-1:0] dest;
  logic           drop;

  assign out_beat = in_beat;

  always_comb begin
    out_valid = '0;
    if (in_pkt && !drop) out_valid[dest] = in_valid;
    if (!in_pkt)   in_ready = 1'b1;
    else if (drop) in_ready = 1'b1;
    else           in_ready = out_ready[dest];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0;
      dest   <= '0;
      drop   <= 1'b0;
    end else if (in_valid && in_ready) begin
      if (!in_pkt) begin
        in_pkt <= 1'b1;
        dest   <= in_beat.data[IDW-1:0];
        drop   <= (in_beat.data >= NDEST);
      end else if (in_beat.last) begin
        in_pkt <= 1'b0;
      end
    end
  end

endmodule
