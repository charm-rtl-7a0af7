// aie_broadcast: circuit-switched broadcast of one stream to NOUT receivers.
//
// The AIE stream switch can copy one input channel to several outputs; the
// MM accelerator uses it to hand the same LHS tile to every AIE of a row and
// the same RHS tile to every AIE of a column. A word leaves the input only
// after every receiver has taken it. Receivers may take it in different
// cycles: a per-receiver `taken` flag remembers who already has the current
// word, so no receiver sees it twice.
// Interface: valid/ready input, NOUT valid/ready outputs sharing out_beat.
// Timing: no added latency; throughput one word per cycle when all receivers
// are ready. The broadcast itself follows the paper; the per-receiver flags
// are this design's way of building it.
module aie_broadcast
  import charm_pkg::*;
#(
  parameter int unsigned NOUT = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  beat_t            in_beat,
  output logic [NOUT-1:0]  out_valid,
  input  logic [NOUT-1:0]  out_ready,
  output beat_t            out_beat
);
  logic [NOUT-1:0] taken;

  assign out_beat  = in_beat;
  assign out_valid = {NOUT{in_valid}} & ~taken;
  assign in_ready  = &(taken | out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taken <= '0;
    end else if (in_valid) begin
      if (in_ready) taken <= '0;
      else          taken <= taken | (out_valid & out_ready);
    end
  end

endmodule
