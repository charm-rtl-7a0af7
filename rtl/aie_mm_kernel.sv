// aie_mm_kernel: the work of one AI Engine in an MM accelerator.
//
// Each AIE holds a TI x TK LHS tile and a TK x TJ RHS tile in its local memory
// and computes the TI x TJ product with a vector MAC unit (32x32x32 tiles and
// 8 fp32 MACs per cycle follow the paper). The kernel works in three phases:
//   LOAD    : accepts the LHS stream (TI*TK words, row-major) and the RHS
//             stream (TK*TJ words, row-major) in parallel, in any interleaving.
//   COMPUTE : LANES output columns per step, one k per cycle, so the phase
//             takes TI*TK*TJ/LANES cycles (4096 at the defaults).
//   OUTPUT  : streams the TI*TJ results row-major, last on the final word.
//             With CASC_IN set, each word is first added to the word arriving
//             on the cascade input, which carries the partial result of the
//             previous AIE along the k (B) dimension of the array.
// Interface: valid/ready streams; a word moves when valid and ready are both
// high. Timing: a tile spends TI*TK*TJ/LANES cycles in COMPUTE; LOAD and
// OUTPUT last as long as their streams need.
// Design choices not taken from the paper: integer arithmetic in place of
// fp32, the k-direction reduction by a cascade input, and no overlap between
// loading the next tile and computing the current one.
module aie_mm_kernel
  import charm_pkg::*;
#(
  parameter int unsigned TI      = 32,
  parameter int unsigned TK      = 32,
  parameter int unsigned TJ      = 32,
  parameter int unsigned LANES   = 8,
  parameter bit          CASC_IN = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lhs_valid,
  output logic  lhs_ready,
  input  data_t lhs_data,
  input  logic  rhs_valid,
  output logic  rhs_ready,
  input  data_t rhs_data,
  input  logic  casc_valid,
  output logic  casc_ready,
  input  data_t casc_data,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data,
  output logic  out_last
);
  localparam int unsigned NL = TI * TK;
  localparam int unsigned NR = TK * TJ;
  localparam int unsigned NO = TI * TJ;
  localparam int unsigned JG = TJ / LANES;

  typedef enum logic [1:0] {S_LOAD, S_COMPUTE, S_OUTPUT} state_e;
  state_e state;

  data_t lhs_mem [NL];
  data_t rhs_mem [NR];
  data_t out_mem [NO];
  data_t acc     [LANES];

  logic [$clog2(NL+1)-1:0] lcnt;
  logic [$clog2(NR+1)-1:0] rcnt;
  logic [$clog2(NO+1)-1:0] ocnt;
  logic [$clog2(TI)-1:0]   ci;
  logic [$clog2(JG+1)-1:0] cjg;
  logic [$clog2(TK)-1:0]   ck;

  initial begin
    assert (TJ % LANES == 0) else $error("TJ must be a multiple of LANES");
  end

  assign lhs_ready = (state == S_LOAD) && (lcnt < NL);
  assign rhs_ready = (state == S_LOAD) && (rcnt < NR);

  logic out_go;
  assign out_valid  = (state == S_OUTPUT) && (!CASC_IN || casc_valid);
  assign casc_ready = (state == S_OUTPUT) && CASC_IN && out_ready;
  assign out_data   = CASC_IN ? out_mem[ocnt] + casc_data : out_mem[ocnt];
  assign out_last   = (ocnt == NO - 1);
  assign out_go     = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      lcnt  <= '0;
      rcnt  <= '0;
      ocnt  <= '0;
      ci    <= '0;
      cjg   <= '0;
      ck    <= '0;
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else begin
      unique case (state)
        S_LOAD: begin
          if (lhs_valid && lhs_ready) begin
            lhs_mem[lcnt] <= lhs_data;
            lcnt <= lcnt + 1'b1;
          end
          if (rhs_valid && rhs_ready) begin
            rhs_mem[rcnt] <= rhs_data;
            rcnt <= rcnt + 1'b1;
          end
          if (lcnt == NL && rcnt == NR) begin
            state <= S_COMPUTE;
            ci <= '0; cjg <= '0; ck <= '0;
            for (int l = 0; l < LANES; l++) acc[l] <= '0;
          end
        end
        S_COMPUTE: begin
          // One vector MAC per cycle: LANES columns of row ci, term ck.
          for (int l = 0; l < LANES; l++) begin
            if (ck == TK - 1) begin
              out_mem[ci*TJ + cjg*LANES + l] <= acc[l] +
                  lhs_mem[ci*TK + ck] * rhs_mem[ck*TJ + cjg*LANES + l];
              acc[l] <= '0;
            end else begin
              acc[l] <= acc[l] + lhs_mem[ci*TK + ck] * rhs_mem[ck*TJ + cjg*LANES + l];
            end
          end
          if (ck == TK - 1) begin
            ck <= '0;
            if (cjg == JG - 1) begin
              cjg <= '0;
              if (ci == TI - 1) begin
                ci    <= '0;
                state <= S_OUTPUT;
                ocnt  <= '0;
              end else begin
                ci <= ci + 1'b1;
              end
            end else begin
              cjg <= cjg + 1'b1;
            end
          end else begin
            ck <= ck + 1'b1;
          end
        end
        S_OUTPUT: begin
          if (out_go) begin
            if (out_last) begin
              state <= S_LOAD;
              lcnt  <= '0;
              rcnt  <= '0;
              ocnt  <= '0;
            end else begin
              ocnt <= ocnt + 1'b1;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // A stream must hold its word until it is taken.
  property p_hold_out;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid;
  endproperty
  assert property (p_hold_out);

endmodule
