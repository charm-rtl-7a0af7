// mm_aie_array: the AIE partition of one MM accelerator.
//
// A x B x C kernels (aie_mm_kernel) compute one (A*TI) x (B*TK) by (B*TK) x
// (C*TJ) product per round. Kernel (a,b,c) multiplies LHS tile (a,b) by RHS
// tile (b,c).
// Feeding: LHS tile (a,b) is number t = a*B+b. It travels on input port
// t / CTC inside a packet whose header is t % CTC; the router of that port
// hands the packet to broadcast group t, which copies it to the C kernels
// (a,b,0..C-1). RHS tile (b,c), number t = b*C+c, travels the same way on the
// RHS ports and is broadcast to kernels (0..A-1,b,c). This is the combined
// broadcast + packet-switch scheme that lets one port feed CTC groups while
// each kernel computes, giving ceil(A*B/CTC) + ceil(B*C/CTC) input ports and
// ceil(A*C/CTC) output ports.
// Draining: kernels along b form a cascade; kernel (a,B-1,c) emits the sum
// over b of all partial tiles, output tile t = a*C+c, which the merger of
// output port t / CTC sends with header t % CTC.
// Interface: arrays of valid/ready streams of beat_t, one per port; LHS and
// RHS packets are header + TI*TK (TK*TJ) payload words, output packets header
// + TI*TJ words. Timing: set by the kernels and the port sharing; with CTC=4
// and 32x32x32 tiles, loading all tiles of one port (4 x 1025 beats) takes
// about as long as one kernel's 4096-cycle compute.
// Port counts and the feeding scheme follow the paper; the cascade reduction
// along b is this design's reading of why only A*C outputs leave the array.
module mm_aie_array
  import charm_pkg::*;
#(
  parameter int unsigned A   = 8,
  parameter int unsigned B   = 4,
  parameter int unsigned C   = 8,
  parameter int unsigned TI  = 32,
  parameter int unsigned TK  = 32,
  parameter int unsigned TJ  = 32,
  parameter int unsigned CTC = 4,
  localparam int unsigned PL = (A*B + CTC - 1) / CTC,
  localparam int unsigned PR = (B*C + CTC - 1) / CTC,
  localparam int unsigned PO = (A*C + CTC - 1) / CTC
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [PL-1:0]  lhs_valid,
  output logic [PL-1:0]  lhs_ready,
  input  beat_t          lhs_beat [PL],
  input  logic [PR-1:0]  rhs_valid,
  output logic [PR-1:0]  rhs_ready,
  input  beat_t          rhs_beat [PR],
  output logic [PO-1:0]  out_valid,
  input  logic [PO-1:0]  out_ready,
  output beat_t          out_beat [PO]
);
  // Broadcast groups: one per LHS tile and one per RHS tile.
  logic  lg_valid [A*B];
  logic  lg_ready [A*B];
  beat_t lg_beat  [A*B];
  logic  rg_valid [B*C];
  logic  rg_ready [B*C];
  beat_t rg_beat  [B*C];

  // Per-kernel LHS/RHS inputs and outputs, kernel index (a*B+b)*C+c.
  localparam int unsigned NK = A*B*C;
  logic  k_lv [NK];
  logic  k_lr [NK];
  logic  k_rv [NK];
  logic  k_rr [NK];
  logic  k_ov [NK];
  logic  k_or [NK];
  data_t k_od [NK];
  logic  k_ol [NK];

  data_t lbeat_of [A*B];

  // ---------------- LHS ports: router per port, broadcast per group -------
  for (genvar p = 0; p < PL; p++) begin : g_lport
    logic [CTC-1:0] rv, rr;
    beat_t          rb;
    aie_pkt_router #(.NDEST(CTC)) u_router (
      .clk, .rst_n,
      .in_valid(lhs_valid[p]), .in_ready(lhs_ready[p]), .in_beat(lhs_beat[p]),
      .out_valid(rv), .out_ready(rr), .out_beat(rb));
    for (genvar d = 0; d < CTC; d++) begin : g_d
      if (p*CTC + d < A*B) begin : g_used
        assign lg_valid[p*CTC+d] = rv[d];
        assign lg_beat[p*CTC+d]  = rb;
        assign rr[d]             = lg_ready[p*CTC+d];
      end else begin : g_unused
        assign rr[d] = 1'b1;
      end
    end
  end

  for (genvar t = 0; t < A*B; t++) begin : g_lgrp
    localparam int unsigned GA = t / B;
    localparam int unsigned GB = t % B;
    logic [C-1:0] ov, orr;
    beat_t        ob;
    aie_broadcast #(.NOUT(C)) u_bc (
      .clk, .rst_n,
      .in_valid(lg_valid[t]), .in_ready(lg_ready[t]), .in_beat(lg_beat[t]),
      .out_valid(ov), .out_ready(orr), .out_beat(ob));
    for (genvar c = 0; c < C; c++) begin : g_c
      assign k_lv[(GA*B+GB)*C+c] = ov[c];
      assign orr[c]              = k_lr[(GA*B+GB)*C+c];
    end
    assign lbeat_of[t] = ob.data;
  end

  // ---------------- RHS ports ---------------------------------------------
  for (genvar p = 0; p < PR; p++) begin : g_rport
    logic [CTC-1:0] rv, rr;
    beat_t          rb;
    aie_pkt_router #(.NDEST(CTC)) u_router (
      .clk, .rst_n,
      .in_valid(rhs_valid[p]), .in_ready(rhs_ready[p]), .in_beat(rhs_beat[p]),
      .out_valid(rv), .out_ready(rr), .out_beat(rb));
    for (genvar d = 0; d < CTC; d++) begin : g_d
      if (p*CTC + d < B*C) begin : g_used
        assign rg_valid[p*CTC+d] = rv[d];
        assign rg_beat[p*CTC+d]  = rb;
        assign rr[d]             = rg_ready[p*CTC+d];
      end else begin : g_unused
        assign rr[d] = 1'b1;
      end
    end
  end

  data_t rbeat_of [B*C];
  for (genvar t = 0; t < B*C; t++) begin : g_rgrp
    localparam int unsigned GB = t / C;
    localparam int unsigned GC = t % C;
    logic [A-1:0] ov, orr;
    beat_t        ob;
    aie_broadcast #(.NOUT(A)) u_bc (
      .clk, .rst_n,
      .in_valid(rg_valid[t]), .in_ready(rg_ready[t]), .in_beat(rg_beat[t]),
      .out_valid(ov), .out_ready(orr), .out_beat(ob));
    for (genvar a = 0; a < A; a++) begin : g_a
      assign k_rv[(a*B+GB)*C+GC] = ov[a];
      assign orr[a]              = k_rr[(a*B+GB)*C+GC];
    end
    assign rbeat_of[t] = ob.data;
  end

  // ---------------- Kernels with cascade along b --------------------------
  for (genvar a = 0; a < A; a++) begin : g_ka
    for (genvar b = 0; b < B; b++) begin : g_kb
      for (genvar c = 0; c < C; c++) begin : g_kc
        localparam int unsigned KI = (a*B+b)*C+c;
        logic  cv, cr;
        data_t cd;
        if (b == 0) begin : g_nocasc
          assign cv = 1'b0;
          assign cd = '0;
        end else begin : g_casc
          localparam int unsigned KP = (a*B+b-1)*C+c;
          assign cv       = k_ov[KP];
          assign cd       = k_od[KP];
          assign k_or[KP] = cr;
        end
        aie_mm_kernel #(.TI(TI), .TK(TK), .TJ(TJ), .CASC_IN(b != 0)) u_k (
          .clk, .rst_n,
          .lhs_valid(k_lv[KI]), .lhs_ready(k_lr[KI]), .lhs_data(lbeat_of[a*B+b]),
          .rhs_valid(k_rv[KI]), .rhs_ready(k_rr[KI]), .rhs_data(rbeat_of[b*C+c]),
          .casc_valid(cv), .casc_ready(cr), .casc_data(cd),
          .out_valid(k_ov[KI]), .out_ready(k_or[KI]), .out_data(k_od[KI]),
          .out_last(k_ol[KI]));
      end
    end
  end

  // ---------------- Output ports: gather the A*C tiles --------------------
  for (genvar p = 0; p < PO; p++) begin : g_oport
    logic [CTC-1:0] sv, sr;
    beat_t          sb [CTC];
    for (genvar s = 0; s < CTC; s++) begin : g_s
      if (p*CTC + s < A*C) begin : g_used
        localparam int unsigned OA = (p*CTC+s) / C;
        localparam int unsigned OC = (p*CTC+s) % C;
        localparam int unsigned KL = (OA*B+B-1)*C+OC;
        assign sv[s]         = k_ov[KL];
        assign sb[s]         = '{data: k_od[KL], last: k_ol[KL]};
        assign k_or[KL]      = sr[s];
      end else begin : g_unused
        assign sv[s] = 1'b0;
        assign sb[s] = '0;
      end
    end
    aie_pkt_merge #(.NSRC(CTC)) u_merge (
      .clk, .rst_n,
      .in_valid(sv), .in_ready(sr), .in_beat(sb),
      .out_valid(out_valid[p]), .out_ready(out_ready[p]), .out_beat(out_beat[p]));
  end

endmodule
