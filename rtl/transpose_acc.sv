// transpose_acc: non-MM accelerator that transposes a matrix in off-chip
// memory (R x C row-major in, C x R row-major out).
//
// The matrix is processed in TB x TB tiles held in a local buffer. For each
// tile the accelerator reads the in-range words row by row into the buffer,
// then writes them column by column, so both the reads and the writes walk
// consecutive addresses. Tiles on the right and bottom edges may be partial.
// Interface: command (valid/ready, vec_cmd_t: rows, cols, addresses) and a
// done pulse; one read channel with in-order responses and one write channel,
// one word per cycle each, at most RD_OUTST reads in flight.
// Timing: each tile position is visited once while loading and once while
// storing, one position per cycle (out-of-range positions of edge tiles cost
// a cycle too), so a tile takes 2*TB*TB cycles plus the read latency, and
// more when the memory stalls. Loading and storing are not overlapped.
// The paper names the transpose kernel and says each non-MM accelerator has
// its own DMA, logic and local buffer; the tiled algorithm is this design's.
module transpose_acc
  import charm_pkg::*;
#(
  parameter int unsigned TB       = 32,
  parameter int unsigned RD_OUTST = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  vec_cmd_t cmd,
  output logic     done,
  output logic     rd_valid,
  input  logic     rd_ready,
  output addr_t    rd_addr,
  input  logic     rresp_valid,
  input  data_t    rresp_data,
  output logic     wr_valid,
  input  logic     wr_ready,
  output addr_t    wr_addr,
  output data_t    wr_data
);
  localparam int unsigned BW = $clog2(TB);
  localparam int unsigned QW = $clog2(RD_OUTST);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_DRAIN, T_STORE, T_NEXT} tstate_e;
  tstate_e  st;
  vec_cmd_t cur;
  dim_t     tr, tc;           // tile row / col index
  logic [BW-1:0] r, c;        // position inside the tile
  data_t    tbuf [TB*TB];
  logic [2*BW-1:0] q [RD_OUTST];
  logic [QW-1:0] wp, rp;
  logic [QW:0]   cnt;

  logic [31:0] g_row, g_col;
  logic        inr, issue, adv, tile_end;

  assign g_row = 32'(tr) * TB + 32'(r);
  assign g_col = 32'(tc) * TB + 32'(c);
  assign inr   = (g_row < 32'(cur.rows)) && (g_col < 32'(cur.cols));
  assign cmd_ready = (st == T_IDLE);

  assign rd_valid = (st == T_LOAD) && inr && (cnt < RD_OUTST);
  assign rd_addr  = cur.addr_in + g_row * cur.cols + g_col;
  assign issue    = rd_valid && rd_ready;

  // store walks c outer, r inner: output row g_col, output column g_row
  assign wr_valid = (st == T_STORE) && inr;
  assign wr_addr  = cur.addr_out + g_col * cur.rows + g_row;
  assign wr_data  = tbuf[{r, c}];

  assign adv = ((st == T_LOAD) && (!inr || issue)) || ((st == T_STORE) && (!inr || wr_ready));
  assign tile_end = (r == BW'(TB-1)) && (c == BW'(TB-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; cur <= '0; tr <= '0; tc <= '0; r <= '0; c <= '0;
      wp <= '0; rp <= '0; cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rresp_valid) begin
        tbuf[q[rp]] <= rresp_data;
        rp <= (rp == QW'(RD_OUTST-1)) ? '0 : rp + 1'b1;
      end
      if (issue) begin
        q[wp] <= {r, c};
        wp <= (wp == QW'(RD_OUTST-1)) ? '0 : wp + 1'b1;
      end
      cnt <= cnt + (issue ? 1'b1 : 1'b0) - (rresp_valid ? 1'b1 : 1'b0);
      unique case (st)
        T_IDLE: if (cmd_valid) begin
          cur <= cmd; tr <= '0; tc <= '0; r <= '0; c <= '0;
          st <= T_LOAD;
        end
        T_LOAD: if (adv) begin
          // row-major walk of the tile
          if (tile_end) begin r <= '0; c <= '0; st <= T_DRAIN; end
          else if (c == BW'(TB-1)) begin c <= '0; r <= r + 1'b1; end
          else c <= c + 1'b1;
        end
        T_DRAIN: if (cnt == 0) st <= T_STORE;
        T_STORE: if (adv) begin
          // column-major walk of the tile
          if (tile_end) begin r <= '0; c <= '0; st <= T_NEXT; end
          else if (r == BW'(TB-1)) begin r <= '0; c <= c + 1'b1; end
          else r <= r + 1'b1;
        end
        T_NEXT: begin
          if (32'(tc + 1) * TB < 32'(cur.cols)) begin tc <= tc + 1'b1; st <= T_LOAD; end
          else if (32'(tr + 1) * TB < 32'(cur.rows)) begin tc <= '0; tr <= tr + 1'b1; st <= T_LOAD; end
          else begin st <= T_IDLE; done <= 1'b1; end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rresp_valid |-> cnt != 0);

endmodule
