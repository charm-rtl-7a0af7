// aie_pkt_merge: packet-switched gather of up to NSRC AIE outputs onto one
// AIE-to-PL port.
//
// Each source sends whole packets (payload beats, `last` on the final one).
// The merger grants one source at a time in round-robin order, first emits a
// header beat whose data is the source ID, then forwards that source's
// payload until its `last` beat, and moves on. The receiver on the PL side
// uses the header to know which output tile the payload belongs to.
// Interface: NSRC valid/ready inputs, one valid/ready output.
// Timing: a packet of P words takes P+1 cycles on the port; the grant
// decision takes one cycle while the header is emitted.
// The gather over a shared port with a header follows the paper (Fig. 4);
// round-robin arbitration is this design's choice.
module aie_pkt_merge
  import charm_pkg::*;
#(
  parameter int unsigned NSRC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NSRC-1:0]  in_valid,
  output logic [NSRC-1:0]  in_ready,
  input  beat_t            in_beat [NSRC],
  output logic             out_valid,
  input  logic             out_ready,
  output beat_t            out_beat
);
  localparam int unsigned IDW = (NSRC > 1) ? $clog2(NSRC) : 1;

  typedef enum logic [1:0] {M_IDLE, M_HDR, M_DATA} mstate_e;
  mstate_e        st;
  logic [IDW-1:0] src;
  logic [IDW-1:0] rr;     // next source to consider first
  logic [IDW-1:0] pick;
  logic           found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned o = 0; o < NSRC; o++) begin
      int unsigned c;
      c = (int'(rr) + o) % NSRC;
      if (!found && in_valid[c]) begin
        found = 1'b1;
        pick  = c[IDW-1:0];
      end
    end
  end

  always_comb begin
    in_ready  = '0;
    out_valid = 1'b0;
    out_beat  = '{data: data_t'(src), last: 1'b0};
    unique case (st)
      M_HDR: out_valid = 1'b1;
      M_DATA: begin
        out_valid     = in_valid[src];
        out_beat      = in_beat[src];
        in_ready[src] = out_ready;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= M_IDLE;
      src <= '0;
      rr  <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (found) begin
          src <= pick;
          rr  <= IDW'((int'(pick) + 1) % NSRC);
          st  <= M_HDR;
        end
        M_HDR:  if (out_ready) st <= M_DATA;
        M_DATA: if (in_valid[src] && out_ready && in_beat[src].last) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
