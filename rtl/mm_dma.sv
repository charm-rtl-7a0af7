// mm_dma: the PL-side DMA module of one MM accelerator, with its on-chip
// LHS, RHS and output buffers.
//
// A command asks for BATCH products C = A * B (A: M x K, B: K x N, all
// row-major in off-chip memory). The DMA runs the outer two loop levels of
// the tiled MM:
//   off-chip loop  for bt, i0 < TX, j0 < TZ, k0 < TY   (k0 innermost)
//     load the LHS tile (X*A*TI rows x Y*B*TK cols) and the RHS tile
//     (Y*B*TK x Z*C*TJ) into one half of the double-buffered LHS/RHS store
//     on-chip loop  for i1 < X, j1 < Z, k1 < Y           (k1 innermost)
//       send the A x B LHS sub-tiles and B x C RHS sub-tiles of this round to
//       the AIE array, receive its A x C output tiles and add them into the
//       output buffer (the first k round overwrites instead of adding)
//   after the last k0 of an (i0,j0) the output tile is written back.
// Four agents run concurrently and meet through bank status flags:
//   loader   - fills LHS/RHS bank s%2 for step s while the sender works on
//              the other bank (double buffering); elements beyond M, K or N
//              are written as zeros (padding to the native tile).
//   sender   - per round, drives all LHS ports in lockstep and all RHS ports
//              in lockstep: for each destination d < CTC a header beat d and
//              then the sub-tile, row-major. Sub-tile t = a*B+b (LHS) or
//              t = b*C+c (RHS) goes to port t/CTC with header t%CTC.
//   receiver - one per output port; decodes the header (source s gives tile
//              t = q*CTC+s = a*C+c) and accumulates into output bank g%2 of
//              (i0,j0) group g.
//   storer   - writes a full output bank back, skipping padded rows and
//              columns, while the next group accumulates into the other bank.
// Interfaces: cmd valid/ready; a read request channel (valid/ready/addr) whose
// responses come back in order, one per request, on rresp_valid/rresp_data;
// a write channel (valid/ready/addr/data); valid/ready AIE streams of beat_t.
// Timing: one word per cycle on each memory channel and on each port; at most
// RD_OUTST reads in flight. `done` pulses one cycle after the last store.
// From the paper: the loop nest and its order, three double-buffered buffers
// sized (X*A*TI)x(Y*B*TK), (Y*B*TK)x(Z*C*TJ), (X*A*TI)x(Z*C*TJ), accumulation of
// partial sums on the PL, padding to the native tile, the port/header
// mapping. This design's choices: word-wide memory channels, lockstep port
// driving, zero-fill of padding inside the loader, and the event outputs.
module mm_dma
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
  parameter int unsigned RD_OUTST = 16,
  localparam int unsigned PL = (A*B + CTC - 1) / CTC,
  localparam int unsigned PR = (B*C + CTC - 1) / CTC,
  localparam int unsigned PO = (A*C + CTC - 1) / CTC
) (
  input  logic           clk,
  input  logic           rst_n,
  // command
  input  logic           cmd_valid,
  output logic           cmd_ready,
  input  mm_cmd_t        cmd,
  output logic           done,
  output logic           busy,
  // off-chip read
  output logic           rd_valid,
  input  logic           rd_ready,
  output addr_t          rd_addr,
  input  logic           rresp_valid,
  input  data_t          rresp_data,
  // off-chip write
  output logic           wr_valid,
  input  logic           wr_ready,
  output addr_t          wr_addr,
  output data_t          wr_data,
  // to / from the AIE array
  output logic [PL-1:0]  lhs_valid,
  input  logic [PL-1:0]  lhs_ready,
  output beat_t          lhs_beat [PL],
  output logic [PR-1:0]  rhs_valid,
  input  logic [PR-1:0]  rhs_ready,
  output beat_t          rhs_beat [PR],
  input  logic [PO-1:0]  out_valid,
  output logic [PO-1:0]  out_ready,
  input  beat_t          out_beat [PO],
  // events, for observation
  output logic           ev_pad,          // a padded (zero) element was loaded
  output logic           ev_load_overlap, // loading while the array is fed
  output logic           ev_store_overlap // storing while the array is fed
);
  localparam int unsigned LR = X*A*TI;   // LHS / output rows per tile
  localparam int unsigned LC = Y*B*TK;   // LHS cols = RHS rows
  localparam int unsigned RC = Z*C*TJ;   // RHS / output cols
  localparam int unsigned NLB = LR*LC;
  localparam int unsigned NRB = LC*RC;
  localparam int unsigned NOB = LR*RC;
  localparam int unsigned LIW = $clog2(NLB);
  localparam int unsigned RIW = $clog2(NRB);
  localparam int unsigned OIW = $clog2(NOB);
  localparam int unsigned QW  = $clog2(RD_OUTST);

  typedef struct packed {
    dim_t bt;
    dim_t i0;
    dim_t j0;
    dim_t k0;
  } step_t;

  typedef struct packed {
    dim_t i1;
    dim_t j1;
    dim_t k1;
  } iter_t;

  typedef enum logic [1:0] {OB_FREE, OB_FILL, OB_FULL} ob_state_e;

  // ---------------------------------------------------------------- command
  mm_cmd_t cur;
  dim_t    tx, ty, tz;
  logic    run;

  function automatic step_t step_next(step_t s);
    step_t r = s;
    if (s.k0 + 1 < ty) r.k0 = s.k0 + 1;
    else begin
      r.k0 = '0;
      if (s.j0 + 1 < tz) r.j0 = s.j0 + 1;
      else begin
        r.j0 = '0;
        if (s.i0 + 1 < tx) r.i0 = s.i0 + 1;
        else begin
          r.i0 = '0;
          r.bt = s.bt + 1;
        end
      end
    end
    return r;
  endfunction

  function automatic logic step_last(step_t s);
    return (s.k0 + 1 >= ty) && (s.j0 + 1 >= tz) && (s.i0 + 1 >= tx) && (s.bt + 1 >= cur.batch);
  endfunction

  function automatic iter_t iter_next(iter_t s);
    iter_t r = s;
    if (s.k1 + 1 < Y) r.k1 = s.k1 + 1;
    else begin
      r.k1 = '0;
      if (s.j1 + 1 < Z) r.j1 = s.j1 + 1;
      else begin
        r.j1 = '0;
        r.i1 = s.i1 + 1;
      end
    end
    return r;
  endfunction

  function automatic logic iter_last(iter_t s);
    return (s.k1 == Y-1) && (s.j1 == Z-1) && (s.i1 == X-1);
  endfunction

  // ---------------------------------------------------------------- storage
  data_t lhs_buf [2][NLB];
  data_t rhs_buf [2][NRB];
  data_t out_buf [2][NOB];

  logic [1:0]      lr_full;
  ob_state_e       ob_st [2];

  // pulses between agents
  logic            ld_fill;   logic ld_fill_bank;
  logic            sd_free;   logic sd_free_bank;
  logic            sd_claim;  logic sd_claim_bank;
  logic            rx_full;   logic rx_full_bank;
  logic            st_free;   logic st_free_bank;
  logic            st_all_done;

  assign cmd_ready = !run;
  assign busy      = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      cur  <= '0;
      tx   <= '0;
      ty   <= '0;
      tz   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        run <= 1'b1;
        cur <= cmd;
        tx  <= dim_t'(ceil_div(cmd.m, LR));
        ty  <= dim_t'(ceil_div(cmd.k, LC));
        tz  <= dim_t'(ceil_div(cmd.n, RC));
      end else if (run && st_all_done) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lr_full <= '0;
      ob_st[0] <= OB_FREE;
      ob_st[1] <= OB_FREE;
    end else begin
      if (ld_fill)  lr_full[ld_fill_bank] <= 1'b1;
      if (sd_free)  lr_full[sd_free_bank] <= 1'b0;
      if (sd_claim) ob_st[sd_claim_bank]  <= OB_FILL;
      if (rx_full)  ob_st[rx_full_bank]   <= OB_FULL;
      if (st_free)  ob_st[st_free_bank]   <= OB_FREE;
    end
  end

  // ---------------------------------------------------------------- loader
  typedef enum logic [2:0] {L_IDLE, L_WAIT, L_LHS, L_RHS, L_DRAIN} lstate_e;
  lstate_e         lst;
  step_t           lstep;
  logic            lbank;
  dim_t            lr, lc;          // element being issued
  // response queue: which buffer word each outstanding read fills
  typedef struct packed {
    logic            is_rhs;
    logic            bank;
    logic [31:0]     idx;
  } rq_t;
  rq_t             rq [RD_OUTST];
  logic [QW-1:0]   rq_wp, rq_rp;
  logic [QW:0]     rq_cnt;

  logic [31:0]     l_row, l_col;
  logic            l_inrange, l_issue, l_pad, l_elem_done, l_tile_end;
  logic [31:0]     l_idx;
  addr_t           l_addr;

  always_comb begin
    if (lst == L_LHS) begin
      l_row     = 32'(lstep.i0) * LR + 32'(lr);
      l_col     = 32'(lstep.k0) * LC + 32'(lc);
      l_inrange = (l_row < 32'(cur.m)) && (l_col < 32'(cur.k));
      l_idx     = 32'(lr) * LC + 32'(lc);
      l_addr    = cur.addr_a + addr_t'(lstep.bt) * cur.m * cur.k + l_row * cur.k + l_col;
      l_tile_end = (lr == LR-1) && (lc == LC-1);
    end else begin
      l_row     = 32'(lstep.k0) * LC + 32'(lr);
      l_col     = 32'(lstep.j0) * RC + 32'(lc);
      l_inrange = (l_row < 32'(cur.k)) && (l_col < 32'(cur.n));
      l_idx     = 32'(lr) * RC + 32'(lc);
      l_addr    = cur.addr_b + addr_t'(lstep.bt) * cur.k * cur.n + l_row * cur.n + l_col;
      l_tile_end = (lr == LC-1) && (lc == RC-1);
    end
  end

  logic l_active;
  assign l_active   = (lst == L_LHS) || (lst == L_RHS);
  assign l_issue    = l_active && l_inrange && (rq_cnt < RD_OUTST) && rd_ready;
  assign l_pad      = l_active && !l_inrange;
  assign l_elem_done = l_issue || l_pad;
  assign rd_valid   = l_active && l_inrange && (rq_cnt < RD_OUTST);
  assign rd_addr    = l_addr;
  assign ev_pad     = l_pad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst    <= L_IDLE;
      lstep  <= '0;
      lbank  <= 1'b0;
      lr     <= '0;
      lc     <= '0;
      rq_wp  <= '0;
      rq_rp  <= '0;
      rq_cnt <= '0;
      ld_fill <= 1'b0;
      ld_fill_bank <= 1'b0;
    end else begin
      ld_fill <= 1'b0;
      // responses
      if (rresp_valid) begin
        if (rq[rq_rp].is_rhs) rhs_buf[rq[rq_rp].bank][rq[rq_rp].idx[RIW-1:0]] <= rresp_data;
        else                  lhs_buf[rq[rq_rp].bank][rq[rq_rp].idx[LIW-1:0]] <= rresp_data;
        rq_rp <= (rq_rp == QW'(RD_OUTST-1)) ? '0 : rq_rp + 1'b1;
      end
      rq_cnt <= rq_cnt + (l_issue ? 1'b1 : 1'b0) - (rresp_valid ? 1'b1 : 1'b0);
      if (l_issue) begin
        rq[rq_wp] <= '{is_rhs: (lst == L_RHS), bank: lbank, idx: l_idx};
        rq_wp <= (rq_wp == QW'(RD_OUTST-1)) ? '0 : rq_wp + 1'b1;
      end
      if (l_pad) begin
        if (lst == L_RHS) rhs_buf[lbank][l_idx[RIW-1:0]] <= '0;
        else              lhs_buf[lbank][l_idx[LIW-1:0]] <= '0;
      end
      unique case (lst)
        L_IDLE: if (cmd_valid && cmd_ready) begin
          lst   <= L_WAIT;
          lstep <= '0;
          lbank <= 1'b0;
        end
        L_WAIT: if (!lr_full[lbank] && !(ld_fill && ld_fill_bank == lbank)) begin
          lst <= L_LHS;
          lr  <= '0;
          lc  <= '0;
        end
        L_LHS, L_RHS: if (l_elem_done) begin
          if (l_tile_end) begin
            lr <= '0;
            lc <= '0;
            lst <= (lst == L_LHS) ? L_RHS : L_DRAIN;
          end else if ((lst == L_LHS && lc == LC-1) || (lst == L_RHS && lc == RC-1)) begin
            lc <= '0;
            lr <= lr + 1'b1;
          end else begin
            lc <= lc + 1'b1;
          end
        end
        L_DRAIN: if (rq_cnt == 0) begin
          ld_fill      <= 1'b1;
          ld_fill_bank <= lbank;
          lbank        <= ~lbank;
          if (step_last(lstep)) lst <= L_IDLE;
          else begin
            lstep <= step_next(lstep);
            lst   <= L_WAIT;
          end
        end
        default: lst <= L_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- sender
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SEND} sstate_e;
  sstate_e  sst;
  step_t    sstep;
  iter_t    sit;
  logic     sbank;     // LHS/RHS bank
  logic     sobank;    // output bank of the current group
  // LHS lockstep position: destination, header flag, row, col within sub-tile
  dim_t     ld_d, ld_i, ld_k;  logic ld_hdr, ld_done;
  dim_t     rd_d, rd_k, rd_j;  logic rd_hdr, rd_done;
  logic [PL-1:0] l_sent;
  logic [PR-1:0] r_sent;
  logic [PL-1:0] l_use;
  logic [PR-1:0] r_use;
  logic     l_adv, r_adv;

  always_comb begin
    for (int p = 0; p < PL; p++) begin
      int unsigned t, ga, gb;
      logic [31:0] idx;
      t = p*CTC + int'(ld_d);
      ga = t / B; gb = t % B;
      l_use[p] = (t < A*B);
      idx = ((32'(sit.i1)*A + ga)*TI + 32'(ld_i)) * LC + (32'(sit.k1)*B + gb)*TK + 32'(ld_k);
      lhs_valid[p] = (sst == S_SEND) && !ld_done && l_use[p] && !l_sent[p];
      lhs_beat[p].data = ld_hdr ? data_t'(ld_d) : lhs_buf[sbank][idx[LIW-1:0]];
      lhs_beat[p].last = !ld_hdr && (ld_i == TI-1) && (ld_k == TK-1);
    end
    for (int p = 0; p < PR; p++) begin
      int unsigned t, gb, gc;
      logic [31:0] idx;
      t = p*CTC + int'(rd_d);
      gb = t / C; gc = t % C;
      r_use[p] = (t < B*C);
      idx = ((32'(sit.k1)*B + gb)*TK + 32'(rd_k)) * RC + (32'(sit.j1)*C + gc)*TJ + 32'(rd_j);
      rhs_valid[p] = (sst == S_SEND) && !rd_done && r_use[p] && !r_sent[p];
      rhs_beat[p].data = rd_hdr ? data_t'(rd_d) : rhs_buf[sbank][idx[RIW-1:0]];
      rhs_beat[p].last = !rd_hdr && (rd_k == TK-1) && (rd_j == TJ-1);
    end
  end

  assign l_adv = (sst == S_SEND) && !ld_done && &(l_sent | lhs_ready | ~l_use);
  assign r_adv = (sst == S_SEND) && !rd_done && &(r_sent | rhs_ready | ~r_use);

  logic s_group_first;
  assign s_group_first = (sstep.k0 == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sst <= S_IDLE;
      sstep <= '0; sit <= '0; sbank <= 1'b0; sobank <= 1'b0;
      ld_d <= '0; ld_i <= '0; ld_k <= '0; ld_hdr <= 1'b1; ld_done <= 1'b0;
      rd_d <= '0; rd_k <= '0; rd_j <= '0; rd_hdr <= 1'b1; rd_done <= 1'b0;
      l_sent <= '0; r_sent <= '0;
      sd_free <= 1'b0; sd_free_bank <= 1'b0;
      sd_claim <= 1'b0; sd_claim_bank <= 1'b0;
    end else begin
      sd_free  <= 1'b0;
      sd_claim <= 1'b0;
      unique case (sst)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          sst <= S_WAIT; sstep <= '0; sbank <= 1'b0; sobank <= 1'b0;
        end
        S_WAIT: if (lr_full[sbank] && !(sd_free && sd_free_bank == sbank) &&
                    (!s_group_first || (ob_st[sobank] == OB_FREE && !(sd_claim && sd_claim_bank == sobank)))) begin
          if (s_group_first) begin
            sd_claim <= 1'b1; sd_claim_bank <= sobank;
          end
          sst <= S_SEND; sit <= '0;
          ld_d <= '0; ld_i <= '0; ld_k <= '0; ld_hdr <= 1'b1; ld_done <= 1'b0;
          rd_d <= '0; rd_k <= '0; rd_j <= '0; rd_hdr <= 1'b1; rd_done <= 1'b0;
          l_sent <= '0; r_sent <= '0;
        end
        S_SEND: begin
          // LHS ports
          if (l_adv) begin
            l_sent <= '0;
            if (ld_hdr) ld_hdr <= 1'b0;
            else if (ld_k != TK-1) ld_k <= ld_k + 1'b1;
            else begin
              ld_k <= '0;
              if (ld_i != TI-1) ld_i <= ld_i + 1'b1;
              else begin
                ld_i <= '0; ld_hdr <= 1'b1;
                if (ld_d == CTC-1) ld_done <= 1'b1;
                else ld_d <= ld_d + 1'b1;
              end
            end
          end else if (!ld_done) begin
            l_sent <= l_sent | (lhs_valid & lhs_ready);
          end
          // RHS ports
          if (r_adv) begin
            r_sent <= '0;
            if (rd_hdr) rd_hdr <= 1'b0;
            else if (rd_j != TJ-1) rd_j <= rd_j + 1'b1;
            else begin
              rd_j <= '0;
              if (rd_k != TK-1) rd_k <= rd_k + 1'b1;
              else begin
                rd_k <= '0; rd_hdr <= 1'b1;
                if (rd_d == CTC-1) rd_done <= 1'b1;
                else rd_d <= rd_d + 1'b1;
              end
            end
          end else if (!rd_done) begin
            r_sent <= r_sent | (rhs_valid & rhs_ready);
          end
          // round complete
          if (ld_done && rd_done) begin
            ld_d <= '0; ld_i <= '0; ld_k <= '0; ld_hdr <= 1'b1; ld_done <= 1'b0;
            rd_d <= '0; rd_k <= '0; rd_j <= '0; rd_hdr <= 1'b1; rd_done <= 1'b0;
            if (iter_last(sit)) begin
              sd_free <= 1'b1; sd_free_bank <= sbank;
              sbank <= ~sbank;
              if (sstep.k0 + 1 >= ty) sobank <= ~sobank;
              if (step_last(sstep)) sst <= S_IDLE;
              else begin
                sstep <= step_next(sstep);
                sst   <= S_WAIT;
              end
            end else begin
              sit <= iter_next(sit);
            end
          end
        end
        default: sst <= S_IDLE;
      endcase
    end
  end

  assign ev_load_overlap = l_active && (sst == S_SEND);

  // ---------------------------------------------------------------- receiver
  typedef struct packed {
    logic  act;      // a command is in progress for this port
    step_t st;
    iter_t it;
    dim_t  pk;       // packets received in this round
    logic  hdr;      // next beat is a header
    dim_t  src;
    dim_t  wi, wj;
    logic  bank;
  } rx_t;
  rx_t              rx [PO];
  logic [PO-1:0]    rx_gdone [2];   // port finished its part of a group

  always_comb begin
    out_ready = '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < PO; q++) rx[q] <= '0;
      rx_gdone[0] <= '0;
      rx_gdone[1] <= '0;
      rx_full <= 1'b0;
      rx_full_bank <= 1'b0;
    end else begin
      logic [PO-1:0] gd0, gd1;
      gd0 = rx_gdone[0];
      gd1 = rx_gdone[1];
      rx_full <= 1'b0;
      for (int q = 0; q < PO; q++) begin
        int unsigned nq;
        nq = ((q+1)*CTC <= A*C) ? CTC : (A*C - q*CTC);
        if (cmd_valid && cmd_ready) begin
          rx[q] <= '0;
          rx[q].act <= 1'b1;
          rx[q].hdr <= 1'b1;
        end else if (rx[q].act && out_valid[q]) begin
          if (rx[q].hdr) begin
            rx[q].hdr <= 1'b0;
            rx[q].src <= dim_t'(out_beat[q].data);
            rx[q].wi  <= '0;
            rx[q].wj  <= '0;
          end else begin
            int unsigned t, oa, oc;
            logic [31:0] idx;
            t  = q*CTC + int'(rx[q].src);
            oa = t / C; oc = t % C;
            idx = ((32'(rx[q].it.i1)*A + oa)*TI + 32'(rx[q].wi)) * RC +
                  (32'(rx[q].it.j1)*C + oc)*TJ + 32'(rx[q].wj);
            if (rx[q].st.k0 == 0 && rx[q].it.k1 == 0)
              out_buf[rx[q].bank][idx[OIW-1:0]] <= out_beat[q].data;
            else
              out_buf[rx[q].bank][idx[OIW-1:0]] <= out_buf[rx[q].bank][idx[OIW-1:0]] + out_beat[q].data;
            if (rx[q].wj != TJ-1) rx[q].wj <= rx[q].wj + 1'b1;
            else begin
              rx[q].wj <= '0;
              if (rx[q].wi != TI-1) rx[q].wi <= rx[q].wi + 1'b1;
              else begin
                // packet complete
                rx[q].hdr <= 1'b1;
                if (32'(rx[q].pk) + 1 < nq) rx[q].pk <= rx[q].pk + 1'b1;
                else begin
                  rx[q].pk <= '0;
                  if (iter_last(rx[q].it)) begin
                    rx[q].it <= '0;
                    if (rx[q].st.k0 + 1 >= ty) begin
                      // group done for this port
                      if (rx[q].bank) gd1[q] = 1'b1; else gd0[q] = 1'b1;
                      rx[q].bank <= ~rx[q].bank;
                    end
                    if (step_last(rx[q].st)) rx[q].act <= 1'b0;
                    else rx[q].st <= step_next(rx[q].st);
                  end else begin
                    rx[q].it <= iter_next(rx[q].it);
                  end
                end
              end
            end
          end
        end
      end
      if (&gd0) begin
        rx_full <= 1'b1; rx_full_bank <= 1'b0; gd0 = '0;
      end else if (&gd1) begin
        rx_full <= 1'b1; rx_full_bank <= 1'b1; gd1 = '0;
      end
      rx_gdone[0] <= gd0;
      rx_gdone[1] <= gd1;
    end
  end

  // ---------------------------------------------------------------- storer
  typedef enum logic [1:0] {W_IDLE, W_WAIT, W_STORE} wstate_e;
  wstate_e  wst;
  step_t    wstep;     // k0 unused
  logic     wbank;
  dim_t     wr_r, wr_c;
  logic [31:0] w_row, w_col;
  logic     w_inrange, w_adv, w_end, w_glast;

  assign w_row     = 32'(wstep.i0) * LR + 32'(wr_r);
  assign w_col     = 32'(wstep.j0) * RC + 32'(wr_c);
  assign w_inrange = (w_row < 32'(cur.m)) && (w_col < 32'(cur.n));
  assign wr_valid  = (wst == W_STORE) && w_inrange;
  assign wr_addr   = cur.addr_c + addr_t'(wstep.bt) * cur.m * cur.n + w_row * cur.n + w_col;
  logic [31:0] w_idx;
  assign w_idx     = 32'(wr_r) * RC + 32'(wr_c);
  assign wr_data   = out_buf[wbank][w_idx[OIW-1:0]];
  assign w_adv     = (wst == W_STORE) && (!w_inrange || wr_ready);
  assign w_end     = (wr_r == LR-1) && (wr_c == RC-1);
  assign w_glast   = (wstep.j0 + 1 >= tz) && (wstep.i0 + 1 >= tx) && (wstep.bt + 1 >= cur.batch);
  assign ev_store_overlap = (wst == W_STORE) && (sst == S_SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= W_IDLE; wstep <= '0; wbank <= 1'b0; wr_r <= '0; wr_c <= '0;
      st_free <= 1'b0; st_free_bank <= 1'b0; st_all_done <= 1'b0;
    end else begin
      st_free <= 1'b0;
      st_all_done <= 1'b0;
      unique case (wst)
        W_IDLE: if (cmd_valid && cmd_ready) begin
          wst <= W_WAIT; wstep <= '0; wbank <= 1'b0;
        end
        W_WAIT: if (ob_st[wbank] == OB_FULL && !(st_free && st_free_bank == wbank)) begin
          wst <= W_STORE; wr_r <= '0; wr_c <= '0;
        end
        W_STORE: if (w_adv) begin
          if (w_end) begin
            st_free <= 1'b1; st_free_bank <= wbank;
            wbank <= ~wbank;
            if (w_glast) begin
              wst <= W_IDLE;
              st_all_done <= 1'b1;
            end else begin
              step_t nx;
              nx = wstep;
              nx.k0 = ty - 1'b1;
              wstep <= step_next(nx);
              wst <= W_WAIT;
            end
          end else if (wr_c == RC-1) begin
            wr_c <= '0; wr_r <= wr_r + 1'b1;
          end else begin
            wr_c <= wr_c + 1'b1;
          end
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  // The read channel holds a request until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n) rd_valid && !rd_ready |=> rd_valid && $stable(rd_addr));
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr));
  // Never more responses than requests.
  assert property (@(posedge clk) disable iff (!rst_n) rresp_valid |-> rq_cnt != 0);

endmodule
