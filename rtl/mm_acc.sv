// mm_acc: one CHARM matrix-multiply accelerator.
//
// An MM accelerator is an AIE partition of A x B x C kernels together with
// its PLIO ports and a dedicated DMA module holding the double-buffered LHS,
// RHS and output buffers. Its native tile is (X*A*TI) x (Y*B*TK) x (Z*C*TJ);
// bigger problems are tiled over it, smaller ones are padded to it.
// The system composes several such accelerators of different shapes, each
// with its own parameters, so that large and small layers both run well.
// Interface: command (valid/ready, mm_cmd_t) and a done pulse; one read
// channel (request valid/ready/addr, in-order responses) and one write channel
// to off-chip memory. Timing: see mm_dma and mm_aie_array.
// The composition (array + PLIO + DMA = one accelerator) is the paper's; the
// default shape A=8, B=4, C=8, X=Y=Z=2 is a choice of this design that uses
// the 256 AIEs the paper gives for the large accelerator of its BERT system.
module mm_acc
  import charm_pkg::*;
#(
  parameter int unsigned A        = 8,
  parameter int unsigned B        = 4,
  parameter int unsigned C        = 8,
  parameter int unsigned X        = 2,
  parameter int unsigned Y        = 2,
  parameter int unsigned Z        = 2,
  parameter int unsigned TI       = 32,
  parameter int unsigned TK       = 32,
  parameter int unsigned TJ       = 32,
  parameter int unsigned CTC      = 4,
  parameter int unsigned RD_OUTST = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cmd_valid,
  output logic    cmd_ready,
  input  mm_cmd_t cmd,
  output logic    done,
  output logic    busy,
  output logic    rd_valid,
  input  logic    rd_ready,
  output addr_t   rd_addr,
  input  logic    rresp_valid,
  input  data_t   rresp_data,
  output logic    wr_valid,
  input  logic    wr_ready,
  output addr_t   wr_addr,
  output data_t   wr_data,
  output logic    ev_pad,
  output logic    ev_load_overlap,
  output logic    ev_store_overlap
);
  localparam int unsigned PL = (A*B + CTC - 1) / CTC;
  localparam int unsigned PR = (B*C + CTC - 1) / CTC;
  localparam int unsigned PO = (A*C + CTC - 1) / CTC;

  logic [PL-1:0] lv, lr;
  beat_t         lb [PL];
  logic [PR-1:0] rv, rr;
  beat_t         rb [PR];
  logic [PO-1:0] ov, orr;
  beat_t         ob [PO];

  mm_dma #(.A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z), .TI(TI), .TK(TK), .TJ(TJ),
           .CTC(CTC), .RD_OUTST(RD_OUTST)) u_dma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .done, .busy,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .lhs_valid(lv), .lhs_ready(lr), .lhs_beat(lb),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_beat(rb),
    .out_valid(ov), .out_ready(orr), .out_beat(ob),
    .ev_pad, .ev_load_overlap, .ev_store_overlap);

  mm_aie_array #(.A(A), .B(B), .C(C), .TI(TI), .TK(TK), .TJ(TJ), .CTC(CTC)) u_array (
    .clk, .rst_n,
    .lhs_valid(lv), .lhs_ready(lr), .lhs_beat(lb),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_beat(rb),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

endmodule
