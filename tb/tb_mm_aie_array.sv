// tb_mm_aie_array: checks one AIE partition (A=2, B=2, C=2, 8x8x8 kernels,
// CTC=2, so 2 LHS, 2 RHS and 2 output ports).
//
// Each round the testbench sends the A*B LHS tiles and B*C RHS tiles as
// packets (header = tile number mod CTC on port tile / CTC) with random
// valid gaps, and collects the output packets with random ready. Each output
// packet's header and port name the tile a*C+c; its payload must equal
// sum over b of LHS(a,b) x RHS(b,c). Three rounds run back to back. The
// round time is checked against the kernel compute time (T^3/8 cycles) plus
// the time to stream the tiles through the shared ports.
module tb_mm_aie_array;
  import charm_pkg::*;
  localparam int unsigned A = 2, B = 2, C = 2, T = 8, CTC = 2;
  localparam int unsigned PL = (A*B + CTC - 1) / CTC;
  localparam int unsigned PR = (B*C + CTC - 1) / CTC;
  localparam int unsigned PO = (A*C + CTC - 1) / CTC;
  localparam int unsigned ROUNDS = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [PL-1:0] lv, lr;
  beat_t lb [PL];
  logic [PR-1:0] rv, rr;
  beat_t rb [PR];
  logic [PO-1:0] ov, orr;
  beat_t ob [PO];
  int checks = 0, failures = 0;

  data_t lhs [ROUNDS][A*B][T*T];
  data_t rhs [ROUNDS][B*C][T*T];
  int out_round [A*C];   // rounds received per output tile
  longint cycles = 0, t_start, t_end;

  mm_aie_array #(.A(A), .B(B), .C(C), .TI(T), .TK(T), .TJ(T), .CTC(CTC)) dut (
    .clk, .rst_n, .lhs_valid(lv), .lhs_ready(lr), .lhs_beat(lb),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_beat(rb),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

  always @(posedge clk) cycles++;

  // One sender per port: for each round, every tile mapped to this port.
  for (genvar p = 0; p < PL; p++) begin : g_lsend
    initial begin
      lv[p] = 0; lb[p] = '0;
      wait (rst_n);
      for (int r = 0; r < ROUNDS; r++)
        for (int t = p*CTC; t < (p+1)*CTC && t < A*B; t++)
          for (int w = -1; w < int'(T*T); w++) begin
            @(negedge clk);
            lv[p] = ($urandom_range(4) != 0);
            lb[p] = (w < 0) ? beat_t'{data: data_t'(t % CTC), last: 1'b0}
                            : beat_t'{data: lhs[r][t][w], last: (w == T*T-1)};
            #1;
            while (!(lv[p] && lr[p])) begin @(negedge clk); lv[p] = 1; #1; end
            @(posedge clk);
            @(negedge clk) lv[p] = 0;
          end
    end
  end
  for (genvar p = 0; p < PR; p++) begin : g_rsend
    initial begin
      rv[p] = 0; rb[p] = '0;
      wait (rst_n);
      for (int r = 0; r < ROUNDS; r++)
        for (int t = p*CTC; t < (p+1)*CTC && t < B*C; t++)
          for (int w = -1; w < int'(T*T); w++) begin
            @(negedge clk);
            rv[p] = ($urandom_range(4) != 0);
            rb[p] = (w < 0) ? beat_t'{data: data_t'(t % CTC), last: 1'b0}
                            : beat_t'{data: rhs[r][t][w], last: (w == T*T-1)};
            #1;
            while (!(rv[p] && rr[p])) begin @(negedge clk); rv[p] = 1; #1; end
            @(posedge clk);
            @(negedge clk) rv[p] = 0;
          end
    end
  end

  // One checker per output port.
  always @(negedge clk) orr <= PO'($urandom);
  for (genvar q = 0; q < PO; q++) begin : g_chk
    int widx = -1;
    int tile = 0;
    always @(posedge clk) begin
      if (ov[q] && orr[q]) begin
        checks++;
        if (widx < 0) begin
          tile = q*CTC + int'(ob[q].data);
          if (ob[q].data >= CTC || tile >= A*C || ob[q].last) begin
            failures++; $display("port %0d bad header %h", q, ob[q]);
          end
          widx = 0;
        end else begin
          automatic int a = tile / C, c = tile % C, r = out_round[tile];
          automatic int i = widx / T, j = widx % T;
          automatic data_t e = '0;
          for (int b = 0; b < B; b++)
            for (int k = 0; k < T; k++)
              e += lhs[r][a*B+b][i*T+k] * rhs[r][b*C+c][k*T+j];
          if (ob[q].data !== e || ob[q].last !== (widx == T*T-1)) begin
            failures++;
            if (failures < 10)
              $display("tile %0d round %0d word %0d: got %0d exp %0d", tile, r, widx, ob[q].data, e);
          end
          widx++;
          if (ob[q].last) begin widx = -1; out_round[tile]++; end
        end
      end
    end
  end

  initial begin
    orr = '0;
    for (int r = 0; r < ROUNDS; r++) begin
      for (int t = 0; t < A*B; t++)
        for (int w = 0; w < T*T; w++) lhs[r][t][w] = data_t'($urandom_range(200)) - 100;
      for (int t = 0; t < B*C; t++)
        for (int w = 0; w < T*T; w++) rhs[r][t][w] = data_t'($urandom_range(200)) - 100;
    end
    for (int t = 0; t < A*C; t++) out_round[t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t_start = cycles;
    wait (out_round.sum() == ROUNDS*A*C);
    t_end = cycles;
    // Per round: each port streams CTC packets of T*T+1 beats at ~4/5 duty
    // (allow 2x), then T^3/8 compute cycles, then CTC output tiles per port
    // with ready high half the time (allow 4x per word).
    checks++;
    if (t_end - t_start > ROUNDS * (2*CTC*(T*T+1) + T*T*T/8 + 4*CTC*T*T) + 200) begin
      failures++;
      $display("too slow: %0d cycles for %0d rounds", t_end - t_start, ROUNDS);
    end
    checks++;
    if (t_end - t_start < ROUNDS * (T*T*T/8)) begin
      failures++;
      $display("faster than the compute bound: %0d cycles", t_end - t_start);
    end
    $display("array: %0d rounds in %0d cycles", ROUNDS, t_end - t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
