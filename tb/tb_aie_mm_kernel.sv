// tb_aie_mm_kernel: checks one AIE kernel (32x32x32, cascade input enabled).
//
// Loads random LHS and RHS tiles with random gaps in both streams, supplies a
// random cascade tile, and compares every output word with lhs*rhs + cascade
// computed here. Also checks the compute phase lasts TI*TK*TJ/8 = 4096 cycles
// (the kernel's 8 MACs per cycle), that `last` marks the final word, and that
// a second tile works after the first.
module tb_aie_mm_kernel;
  import charm_pkg::*;
  localparam int unsigned TI = 32, TK = 32, TJ = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lv, lr, rv, rr, cv, cr, ov, orr, ol;
  data_t ld, rd, cd, od;
  int checks = 0, failures = 0;

  aie_mm_kernel #(.TI(TI), .TK(TK), .TJ(TJ), .CASC_IN(1'b1)) dut (
    .clk, .rst_n, .lhs_valid(lv), .lhs_ready(lr), .lhs_data(ld),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_data(rd),
    .casc_valid(cv), .casc_ready(cr), .casc_data(cd),
    .out_valid(ov), .out_ready(orr), .out_data(od), .out_last(ol));

  data_t L [TI*TK], R [TK*TJ], Cs [TI*TJ];
  int li, ri, ci, oi;
  longint cyc = 0, t_loaded, t_out;
  always @(posedge clk) cyc++;

  task automatic one_tile();
    for (int i = 0; i < TI*TK; i++) L[i] = data_t'($urandom_range(200)) - 100;
    for (int i = 0; i < TK*TJ; i++) R[i] = data_t'($urandom_range(200)) - 100;
    for (int i = 0; i < TI*TJ; i++) Cs[i] = data_t'($urandom);
    li = 0; ri = 0; ci = 0; oi = 0; t_out = -1;
    fork
      while (li < TI*TK) begin
        @(negedge clk); lv = ($urandom_range(3) != 0); ld = L[li];
        #1; if (lv && lr) begin @(posedge clk); li++; end else @(posedge clk);
      end
      while (ri < TK*TJ) begin
        @(negedge clk); rv = ($urandom_range(3) != 0); rd = R[ri];
        #1; if (rv && rr) begin @(posedge clk); ri++; end else @(posedge clk);
      end
    join
    @(negedge clk); lv = 0; rv = 0;
    t_loaded = cyc;
    while (oi < TI*TJ) begin
      @(negedge clk);
      // a stream source keeps valid up once raised, until the word is taken
      if (!cv) cv = ($urandom_range(4) != 0);
      cd = Cs[oi]; orr = ($urandom_range(4) != 0);
      #1;
      if (ov && t_out < 0) t_out = cyc;
      if (ov && orr) begin
        data_t e = Cs[oi];
        for (int k = 0; k < TK; k++) e += L[(oi/TJ)*TK + k] * R[k*TJ + oi%TJ];
        checks++;
        if (od !== e || ol !== (oi == TI*TJ-1)) begin
          failures++;
          if (failures < 5) $display("word %0d got %0d exp %0d last %0b", oi, od, e, ol);
        end
        oi++;
        @(posedge clk);
        @(negedge clk) cv = 0;
      end else @(posedge clk);
    end
    @(negedge clk); cv = 0; orr = 0;
    checks++;
    // compute takes 4096 cycles; the output appears within a few cycles after
    if (t_out - t_loaded < TI*TK*TJ/8 || t_out - t_loaded > TI*TK*TJ/8 + 4) begin
      failures++;
      $display("compute latency %0d, expected about %0d", t_out - t_loaded, TI*TK*TJ/8);
    end
  endtask

  initial begin
    lv = 0; rv = 0; cv = 0; orr = 0; ld = '0; rd = '0; cd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    one_tile();
    one_tile();
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
