// charm_top: CHARM system for BERT with two diverse MM accelerators and four
// non-MM accelerators.
//
// The AIE array is split into two MM accelerators of different shapes:
// MM0 (A0 x B0 x C0 = 256 kernels) with large on-chip buffers for the large
// layers, and MM1 (A1 x B1 x C1 = 32 kernels) with a small native tile for the
// small batched products of attention. Both run at the same time on
// different layers; a runtime scheduler (crts_scheduler) hands each of them
// the next layer of any task whose dependencies are met. The non-MM kernels
// (softmax, layer normalisation and two transposes) have one accelerator each
// and are launched directly by the host, before or after the MM work, since
// they use the whole memory bandwidth.
// Memory map and interconnect: every accelerator has its own read and write
// channel, brought out as element i of the rd_*/wr_* port arrays
// (0 = MM0, 1 = MM1, 2 = softmax, 3 = layernorm, 4 = transpose0,
// 5 = transpose1). The network-on-chip and DDR controller that join them to
// memory are outside this design.
// Host interface: scheduler pool writes (cfg_*), start / all_done, and for
// each non-MM accelerator i (0 softmax, 1 layernorm, 2 transpose0,
// 3 transpose1) a vec_cmd_t command with valid/ready and a done pulse.
// Observation outputs report padding, buffer overlap, dependency waits and
// concurrent MM execution.
// From the paper: the set of accelerators, MM0 with 256 AIEs and MM1 with 32
// AIEs, per-accelerator DMA and buffers, the scheduler. This design's
// choices: the shapes A/B/C/X/Y/Z of both MM accelerators (the paper gives
// only their AIE counts) and one memory channel per accelerator.
module charm_top
  import charm_pkg::*;
#(
  parameter int unsigned A0 = 8, B0 = 4, C0 = 8, X0 = 2, Y0 = 2, Z0 = 2,
  parameter int unsigned A1 = 4, B1 = 2, C1 = 4, X1 = 1, Y1 = 1, Z1 = 1,
  parameter int unsigned TI = 32, TK = 32, TJ = 32,
  parameter int unsigned CTC = 4,
  parameter int unsigned NUM_TASKS  = 4,
  parameter int unsigned NUM_LAYERS = 8,
  parameter int unsigned MAXC = 1024,
  parameter int unsigned TB   = 32,
  localparam int unsigned NMEM = 6,
  localparam int unsigned TW = (NUM_TASKS > 1) ? $clog2(NUM_TASKS) : 1,
  localparam int unsigned LW = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // scheduler
  input  logic                  cfg_we,
  input  logic [TW-1:0]         cfg_task,
  input  logic [LW-1:0]         cfg_layer,
  input  logic                  cfg_valid,
  input  logic                  cfg_acc,
  input  logic [NUM_LAYERS-1:0] cfg_deps,
  input  mm_cmd_t               cfg_cmd,
  input  logic                  start,
  output logic                  running,
  output logic                  all_done,
  // non-MM accelerators
  input  logic [3:0]            vcmd_valid,
  output logic [3:0]            vcmd_ready,
  input  vec_cmd_t              vcmd [4],
  output logic [3:0]            vdone,
  // memory channels
  output logic [NMEM-1:0]       rd_valid,
  input  logic [NMEM-1:0]       rd_ready,
  output addr_t                 rd_addr [NMEM],
  input  logic [NMEM-1:0]       rresp_valid,
  input  data_t                 rresp_data [NMEM],
  output logic [NMEM-1:0]       wr_valid,
  input  logic [NMEM-1:0]       wr_ready,
  output addr_t                 wr_addr [NMEM],
  output data_t                 wr_data [NMEM],
  // observation
  output logic [1:0]            ev_pad,
  output logic [1:0]            ev_load_overlap,
  output logic [1:0]            ev_store_overlap,
  output logic [1:0]            ev_dep_wait,
  output logic                  ev_concurrent
);
  logic [1:0] mcmd_valid, mcmd_ready, mdone, mbusy;
  mm_cmd_t    mcmd [2];

  crts_scheduler #(.NUM_ACC(2), .NUM_TASKS(NUM_TASKS), .NUM_LAYERS(NUM_LAYERS)) u_sched (
    .clk, .rst_n,
    .cfg_we, .cfg_task, .cfg_layer, .cfg_valid, .cfg_acc, .cfg_deps, .cfg_cmd,
    .start, .running, .all_done,
    .acc_cmd_valid(mcmd_valid), .acc_cmd_ready(mcmd_ready), .acc_cmd(mcmd),
    .acc_done(mdone), .ev_dep_wait, .ev_concurrent);

  mm_acc #(.A(A0), .B(B0), .C(C0), .X(X0), .Y(Y0), .Z(Z0), .TI(TI), .TK(TK), .TJ(TJ), .CTC(CTC)) u_mm0 (
    .clk, .rst_n,
    .cmd_valid(mcmd_valid[0]), .cmd_ready(mcmd_ready[0]), .cmd(mcmd[0]), .done(mdone[0]), .busy(mbusy[0]),
    .rd_valid(rd_valid[0]), .rd_ready(rd_ready[0]), .rd_addr(rd_addr[0]),
    .rresp_valid(rresp_valid[0]), .rresp_data(rresp_data[0]),
    .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0]),
    .ev_pad(ev_pad[0]), .ev_load_overlap(ev_load_overlap[0]), .ev_store_overlap(ev_store_overlap[0]));

  mm_acc #(.A(A1), .B(B1), .C(C1), .X(X1), .Y(Y1), .Z(Z1), .TI(TI), .TK(TK), .TJ(TJ), .CTC(CTC)) u_mm1 (
    .clk, .rst_n,
    .cmd_valid(mcmd_valid[1]), .cmd_ready(mcmd_ready[1]), .cmd(mcmd[1]), .done(mdone[1]), .busy(mbusy[1]),
    .rd_valid(rd_valid[1]), .rd_ready(rd_ready[1]), .rd_addr(rd_addr[1]),
    .rresp_valid(rresp_valid[1]), .rresp_data(rresp_data[1]),
    .wr_valid(wr_valid[1]), .wr_ready(wr_ready[1]), .wr_addr(wr_addr[1]), .wr_data(wr_data[1]),
    .ev_pad(ev_pad[1]), .ev_load_overlap(ev_load_overlap[1]), .ev_store_overlap(ev_store_overlap[1]));

  softmax_acc #(.MAXC(MAXC)) u_softmax (
    .clk, .rst_n,
    .cmd_valid(vcmd_valid[0]), .cmd_ready(vcmd_ready[0]), .cmd(vcmd[0]), .done(vdone[0]),
    .rd_valid(rd_valid[2]), .rd_ready(rd_ready[2]), .rd_addr(rd_addr[2]),
    .rresp_valid(rresp_valid[2]), .rresp_data(rresp_data[2]),
    .wr_valid(wr_valid[2]), .wr_ready(wr_ready[2]), .wr_addr(wr_addr[2]), .wr_data(wr_data[2]));

  layernorm_acc #(.MAXC(MAXC)) u_layernorm (
    .clk, .rst_n,
    .cmd_valid(vcmd_valid[1]), .cmd_ready(vcmd_ready[1]), .cmd(vcmd[1]), .done(vdone[1]),
    .rd_valid(rd_valid[3]), .rd_ready(rd_ready[3]), .rd_addr(rd_addr[3]),
    .rresp_valid(rresp_valid[3]), .rresp_data(rresp_data[3]),
    .wr_valid(wr_valid[3]), .wr_ready(wr_ready[3]), .wr_addr(wr_addr[3]), .wr_data(wr_data[3]));

  for (genvar i = 0; i < 2; i++) begin : g_tr
    transpose_acc #(.TB(TB)) u_transpose (
      .clk, .rst_n,
      .cmd_valid(vcmd_valid[2+i]), .cmd_ready(vcmd_ready[2+i]), .cmd(vcmd[2+i]), .done(vdone[2+i]),
      .rd_valid(rd_valid[4+i]), .rd_ready(rd_ready[4+i]), .rd_addr(rd_addr[4+i]),
      .rresp_valid(rresp_valid[4+i]), .rresp_data(rresp_data[4+i]),
      .wr_valid(wr_valid[4+i]), .wr_ready(wr_ready[4+i]), .wr_addr(wr_addr[4+i]), .wr_data(wr_data[4+i]));
  end

endmodule
