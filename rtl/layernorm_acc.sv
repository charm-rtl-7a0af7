// layernorm_acc: non-MM accelerator computing a row-wise layer normalisation
// of an R x C matrix in off-chip memory, y = (x - mean) / sqrt(var + eps).
//
// Numbers are signed Q16.16 fixed point. Each row is read once into a local
// buffer of MAXC words and then processed in passes:
//   LOAD - read the row and sum it;          MEAN - mean = sum / cols;
//   VAR  - accumulate (x - mean)^2;          VDIV - var = that sum / cols;
//   SQRT - std = sqrt(var + eps) in Q16.16;  INV  - inv = 2^40 / std;
//   OUT  - write (x - mean) * inv >> 24, one word per cycle.
// Divisions use one shared sequential divider (64 cycles each) and the
// square root a sequential one (32 cycles). eps is one LSB (2^-16).
// No learned scale or shift is applied: the output is the normalised row.
// Interface: command (valid/ready, vec_cmd_t, cols <= MAXC) and a done pulse;
// in-order read channel and write channel as the other accelerators.
// Timing: about 3 * cols + 230 cycles per row.
// The paper names the layer-normalisation kernel and gives each non-MM
// accelerator its own DMA, logic and buffers; the number format, the
// algorithm and the omission of scale/shift are this design's choices.
module layernorm_acc
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

  typedef enum logic [3:0] {N_IDLE, N_LOAD, N_MEAN, N_VAR, N_VDIV, N_SQRT, N_INV, N_OUT, N_NEXT} nstate_e;
  nstate_e     st;
  vec_cmd_t    cur;
  dim_t        row;
  logic [CW-1:0] ic, rcv;
  data_t       rbuf [MAXC];
  logic signed [63:0] sum;
  logic [63:0] sq;
  data_t       mean;
  logic [63:0] var_q;     // Q32.32 for the square root
  logic [31:0] stdv;
  logic [63:0] inv;

  // shared divider
  logic        div_start, div_busy, div_done;
  logic [63:0] div_num, div_q;
  logic [31:0] div_den;
  seq_divider #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quot(div_q));

  logic        sq_start, sq_busy, sq_done;
  logic [31:0] sq_root;
  seq_isqrt #(.W(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .value(var_q), .busy(sq_busy), .done(sq_done),
    .root(sq_root));

  always_comb begin
    div_num = '0;
    div_den = 32'(cur.cols);
    unique case (st)
      N_MEAN: div_num = sum[63] ? 64'(-sum) : 64'(sum);
      N_VDIV: div_num = sq;
      N_INV: begin
        div_num = 64'h0000_0100_0000_0000;   // 2^40
        div_den = stdv;
      end
      default: ;
    endcase
  end
  assign div_start = ((st == N_MEAN) || (st == N_VDIV) || (st == N_INV)) && !div_busy && !div_done;
  assign sq_start  = (st == N_SQRT) && !sq_busy && !sq_done;

  logic [31:0] row_base;
  assign row_base  = 32'(row) * cur.cols;
  assign cmd_ready = (st == N_IDLE);
  assign rd_valid  = (st == N_LOAD) && (ic < CW'(cur.cols)) && ((ic - rcv) < RD_OUTST);
  assign rd_addr   = cur.addr_in + row_base + 32'(ic);
  assign wr_valid  = (st == N_OUT);
  assign wr_addr   = cur.addr_out + row_base + 32'(ic);

  data_t dcur;
  logic signed [95:0] yprod;
  assign dcur   = rbuf[ic[IW-1:0]] - mean;
  assign yprod  = 96'(signed'(dcur)) * signed'({32'd0, inv});
  assign wr_data = data_t'(yprod >>> 24);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= N_IDLE; cur <= '0; row <= '0; ic <= '0; rcv <= '0;
      sum <= '0; sq <= '0; mean <= '0; var_q <= '0; stdv <= '0; inv <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        N_IDLE: if (cmd_valid) begin
          cur <= cmd; row <= '0; ic <= '0; rcv <= '0; sum <= '0; st <= N_LOAD;
        end
        N_LOAD: begin
          if (rd_valid && rd_ready) ic <= ic + 1'b1;
          if (rresp_valid) begin
            rbuf[rcv[IW-1:0]] <= rresp_data;
            sum <= sum + 64'(rresp_data);
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == CW'(cur.cols)) st <= N_MEAN;
          end
        end
        N_MEAN: if (div_done) begin
          mean <= sum[63] ? -data_t'(div_q) : data_t'(div_q);
          ic <= '0; sq <= '0; st <= N_VAR;
        end
        N_VAR: begin
          logic signed [63:0] d2;
          d2 = 64'(signed'(rbuf[ic[IW-1:0]] - mean)) * 64'(signed'(rbuf[ic[IW-1:0]] - mean));
          sq <= sq + 64'(d2 >>> 16);
          if (ic + 1'b1 == CW'(cur.cols)) begin ic <= '0; st <= N_VDIV; end
          else ic <= ic + 1'b1;
        end
        N_VDIV: if (div_done) begin
          var_q <= (div_q + 64'd1) << 16;          // (var + eps), Q32.32
          st <= N_SQRT;
        end
        N_SQRT: if (sq_done) begin stdv <= sq_root; st <= N_INV; end
        N_INV:  if (div_done) begin inv <= div_q; ic <= '0; st <= N_OUT; end
        N_OUT: if (wr_ready) begin
          if (ic + 1'b1 == CW'(cur.cols)) st <= N_NEXT;
          else ic <= ic + 1'b1;
        end
        N_NEXT: begin
          if (row + 1'b1 < cur.rows) begin
            row <= row + 1'b1; ic <= '0; rcv <= '0; sum <= '0; st <= N_LOAD;
          end else begin
            st <= N_IDLE; done <= 1'b1;
          end
        end
        default: st <= N_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && cmd_ready |-> cmd.cols <= MAXC);

endmodule
