// softmax_acc: non-MM accelerator computing a row-wise softmax of an
// R x C matrix in off-chip memory, y[r][c] = exp(x[r][c]) / sum_c exp(x[r][c]).
//
// Numbers are signed Q16.16 fixed point. Each row goes through three passes
// over a local row buffer of MAXC words:
//   LOAD - read the row, keeping its maximum;
//   EXP  - replace every x by e = exp(x - max), one word per cycle, and sum
//          them. exp is computed as 2^(d*log2 e): the integer part of the
//          exponent becomes a right shift, the fraction goes through a cubic
//          polynomial for 2^f on [0,1) (error about 2e-4);
//   NORM - one division gives recip = 2^48 / sum, then y = e * recip >> 32 is
//          written back, one word per cycle.
// Subtracting the row maximum keeps every exponent <= 0, so e <= 1.0 and the
// sum stays within 32 bits for rows of up to 32768 words.
// Interface: command (valid/ready, vec_cmd_t, cols <= MAXC) and a done pulse;
// in-order read channel and write channel as the other accelerators.
// Timing: about 3 * cols cycles plus ~50 cycles for the division per row.
// The paper names the softmax kernel and gives each non-MM accelerator its
// own DMA, logic and buffers; the number format and the algorithm are this
// design's.
module softmax_acc
  import charm_pkg::*;
#(
  parameter int unsigned MAXC     = 1024,
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
  localparam int unsigned CW = $clog2(MAXC+1);
  localparam int unsigned IW = $clog2(MAXC);
  localparam logic signed [31:0] LOG2E = 32'sd94548;   // log2(e) in Q16.16

  typedef enum logic [2:0] {X_IDLE, X_LOAD, X_EXP, X_DIV, X_NORM, X_NEXT} xstate_e;
  xstate_e     st;
  vec_cmd_t    cur;
  dim_t        row;
  logic [CW-1:0] ic, rcv;       // issue index, responses received
  data_t       rbuf [MAXC];
  data_t       mx;
  logic [63:0] sum;
  logic [63:0] recip;

  // exp(d) for d <= 0, Q16.16
  function automatic data_t exp_neg(data_t d);
    logic signed [63:0] y;
    logic signed [31:0] n;
    logic [31:0] f, t;
    logic [31:0] p;
    y = (64'(d) * 64'(LOG2E)) >>> 16;           // exponent in base 2, Q16.16
    n = 32'(y >>> 16);                           // floor
    f = 32'(y) & 32'h0000_FFFF;                  // fraction, Q0.16
    t = 32'd5158;                                // 0.0787
    t = 32'd14824 + ((f * t) >> 16);             // 0.2262
    t = 32'd45553 + ((f * t) >> 16);             // 0.6951
    p = 32'd65536 + ((f * t) >> 16);             // 2^f in Q16.16
    if (n < -31) return '0;
    return data_t'(p >> (-n));
  endfunction

  logic div_start, div_busy, div_done;
  logic [63:0] div_q;
  seq_divider #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(64'h0001_0000_0000_0000),
    .den(sum[31:0]), .busy(div_busy), .done(div_done), .quot(div_q));

  logic [31:0] row_base;
  assign row_base = 32'(row) * cur.cols;
  assign cmd_ready = (st == X_IDLE);
  assign rd_valid  = (st == X_LOAD) && (ic < CW'(cur.cols)) && ((ic - rcv) < RD_OUTST);
  assign rd_addr   = cur.addr_in + row_base + 32'(ic);
  assign wr_valid  = (st == X_NORM);
  assign wr_addr   = cur.addr_out + row_base + 32'(ic);
  logic [63:0] prod;
  assign prod      = 64'(rbuf[ic[IW-1:0]]) * recip;
  assign wr_data   = data_t'(prod >> 32);
  assign div_start = (st == X_DIV) && !div_busy && !div_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; cur <= '0; row <= '0; ic <= '0; rcv <= '0;
      mx <= '0; sum <= '0; recip <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        X_IDLE: if (cmd_valid) begin
          cur <= cmd; row <= '0; ic <= '0; rcv <= '0; st <= X_LOAD;
          mx <= 32'sh8000_0000;
        end
        X_LOAD: begin
          if (rd_valid && rd_ready) ic <= ic + 1'b1;
          if (rresp_valid) begin
            rbuf[rcv[IW-1:0]] <= rresp_data;
            if (rresp_data > mx) mx <= rresp_data;
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == CW'(cur.cols)) begin st <= X_EXP; ic <= '0; sum <= '0; end
          end
        end
        X_EXP: begin
          data_t e;
          e = exp_neg(rbuf[ic[IW-1:0]] - mx);
          rbuf[ic[IW-1:0]] <= e;
          sum <= sum + 64'(e);
          if (ic + 1'b1 == CW'(cur.cols)) begin ic <= '0; st <= X_DIV; end
          else ic <= ic + 1'b1;
        end
        X_DIV: if (div_done) begin recip <= div_q; st <= X_NORM; end
        X_NORM: if (wr_ready) begin
          if (ic + 1'b1 == CW'(cur.cols)) st <= X_NEXT;
          else ic <= ic + 1'b1;
        end
        X_NEXT: begin
          if (row + 1'b1 < cur.rows) begin
            row <= row + 1'b1; ic <= '0; rcv <= '0; mx <= 32'sh8000_0000; st <= X_LOAD;
          end else begin
            st <= X_IDLE; done <= 1'b1;
          end
        end
        default: st <= X_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && cmd_ready |-> cmd.cols <= MAXC);

endmodule
