// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// On `start` it latches num (NW bits) and den (DW bits); NW cycles later it
// raises `done` for one cycle with quot = num / den (den = 0 gives all ones).
// Used by the softmax and layer-normalisation accelerators, which need a few
// divisions per matrix row. Helper of this design; the paper does not
// describe the arithmetic of those accelerators.
module seq_divider #(
  parameter int unsigned NW = 64,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quot
);
  localparam int unsigned CW = $clog2(NW+1);
  logic [NW-1:0] n_sh;
  logic [DW:0]   rem;
  logic [DW-1:0] d;
  logic [CW-1:0] cnt;
  logic [DW:0]   trial;

  assign trial = {rem[DW-1:0], n_sh[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quot <= '0; n_sh <= '0; rem <= '0; d <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; n_sh <= num; d <= den; rem <= '0; cnt <= '0; quot <= '0;
      end else if (busy) begin
        n_sh <= n_sh << 1;
        if (trial >= {1'b0, d}) begin
          rem  <= trial - {1'b0, d};
          quot <= {quot[NW-2:0], 1'b1};
        end else begin
          rem  <= trial;
          quot <= {quot[NW-2:0], 1'b0};
        end
        if (cnt == CW'(NW-1)) begin busy <= 1'b0; done <= 1'b1; end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
