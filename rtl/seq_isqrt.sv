// seq_isqrt: integer square root, one result bit per cycle.
//
// On `start` it latches a W-bit value; W/2 cycles later `done` pulses with
// root = floor(sqrt(value)). Classic digit-by-digit method on pairs of bits.
// Helper of the layer-normalisation accelerator (design choice; the paper
// does not describe that accelerator's arithmetic).
module seq_isqrt #(
  parameter int unsigned W = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   value,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  localparam int unsigned CW = $clog2(W/2+1);
  logic [W-1:0]   v;
  logic [W/2+2:0] rem;
  logic [CW-1:0]  cnt;
  logic [W/2+2:0] trial, rem_sh;

  assign rem_sh = {rem[W/2:0], v[W-1:W-2]};
  assign trial  = {1'b0, root, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; v <= '0; rem <= '0; root <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; v <= value; rem <= '0; root <= '0; cnt <= '0;
      end else if (busy) begin
        v <= v << 2;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[W/2-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[W/2-2:0], 1'b0};
        end
        if (cnt == CW'(W/2-1)) begin busy <= 1'b0; done <= 1'b1; end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
