// tb_charm_full: the CHARM system at its full default size.
//
// charm_top is instantiated with no parameter overrides: MM0 is 8x4x8 AIE
// kernels of 32x32x32 (256 AIEs, native tile 512x256x512), MM1 is 4x2x4
// (32 AIEs, native tile 128x64x128), CTC=4, and the non-MM accelerators
// hold rows of up to 1024 values and 32x32 transpose tiles. One task with
// two independent MM layers is scheduled, one per accelerator, so both run
// at the same time; sizes are not multiples of the native tiles (padding)
// and MM1's layer needs two k steps (accumulation). Then softmax, layer
// normalisation and a transpose run. Every result is compared with values
// computed here. The MM0 run time is checked against the array rate: one
// native tile is X*Y*Z = 8 array rounds of at least 4096 compute cycles.
// The memory model never stalls here, to keep the run short: one native
// tile of MM0 moves about 0.5M words through its single memory channel
// (roughly 620k cycles in all).
module tb_charm_full;
  import charm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_valid, cfg_acc, start, running, all_done;
  logic [1:0] cfg_task;
  logic [2:0] cfg_layer;
  logic [7:0] cfg_deps;
  mm_cmd_t cfg_cmd;
  logic [3:0] vcmd_valid, vcmd_ready, vdone;
  vec_cmd_t vcmd [4];
  logic [5:0] rd_valid, rd_ready, rresp_valid, wr_valid, wr_ready;
  addr_t rd_addr [6], wr_addr [6];
  data_t rresp_data [6], wr_data [6];
  logic [1:0] ev_pad, ev_lo, ev_so, ev_dw;
  logic ev_cc;

  charm_top dut (
    .clk, .rst_n, .cfg_we, .cfg_task, .cfg_layer, .cfg_valid, .cfg_acc, .cfg_deps, .cfg_cmd,
    .start, .running, .all_done, .vcmd_valid, .vcmd_ready, .vcmd, .vdone,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .ev_pad, .ev_load_overlap(ev_lo), .ev_store_overlap(ev_so), .ev_dep_wait(ev_dw),
    .ev_concurrent(ev_cc));

  mem_shared #(.WORDS(1 << 17), .NCH(6), .STALL(1'b0)) u_mem (
    .clk, .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  int n_pad [2], n_cc = 0;
  longint cycles = 0, mm0_start = 0, mm0_end = 0;
  initial for (int i = 0; i < 2; i++) n_pad[i] = 0;
  always @(posedge clk) begin
    cycles++;
    for (int i = 0; i < 2; i++) if (ev_pad[i]) n_pad[i]++;
    if (ev_cc) n_cc++;
    if (dut.mcmd_valid[0] && dut.mcmd_ready[0]) mm0_start = cycles;
    if (dut.mdone[0]) mm0_end = cycles;
  end

  // layer l: m x k by k x n at A / B, result at Cm
  int    mm_m [2] = '{100, 64};
  int    mm_k [2] = '{70, 100};
  int    mm_n [2] = '{90, 50};
  addr_t mm_a [2] = '{32'h00000, 32'h08000};
  addr_t mm_b [2] = '{32'h04000, 32'h0C000};
  addr_t mm_c [2] = '{32'h10000, 32'h14000};

  function automatic real q2r(data_t v); return real'(v) / 65536.0; endfunction
  function automatic data_t r2q(real v); return data_t'($rtoi(v * 65536.0)); endfunction
  function automatic real absr(real v); return (v < 0.0) ? -v : v; endfunction

  task automatic launch_vec(int i, vec_cmd_t c);
    @(negedge clk);
    vcmd[i] = c; vcmd_valid[i] = 1'b1;
    #1;
    while (!vcmd_ready[i]) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    vcmd_valid[i] = 1'b0;
    while (!vdone[i]) @(posedge clk);
  endtask

  localparam int unsigned SMC = 1000, LNR = 2, LNC = 300, TRR = 40, TRC = 70;
  localparam addr_t SM_IN = 32'h18000, SM_OUT = 32'h18400, LN_OUT = 32'h18800;
  localparam addr_t TR_OUT = 32'h1A000;

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_acc = 0; start = 0; cfg_task = '0; cfg_layer = '0;
    cfg_deps = '0; cfg_cmd = '0; vcmd_valid = '0;
    for (int i = 0; i < 4; i++) vcmd[i] = '0;
    for (int l = 0; l < 2; l++) begin
      for (int i = 0; i < mm_m[l]*mm_k[l]; i++) u_mem.mem[mm_a[l]+i] = data_t'($urandom_range(20)) - 10;
      for (int i = 0; i < mm_k[l]*mm_n[l]; i++) u_mem.mem[mm_b[l]+i] = data_t'($urandom_range(20)) - 10;
    end
    for (int i = 0; i < SMC; i++) u_mem.mem[SM_IN+i] = r2q(($urandom_range(8000) / 1000.0) - 4.0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 8; l++) begin
      @(negedge clk);
      cfg_we = 1; cfg_task = 2'd0; cfg_layer = l[2:0]; cfg_valid = (l < 2);
      cfg_acc = l[0]; cfg_deps = '0;
      cfg_cmd = (l < 2) ? '{m: dim_t'(mm_m[l]), k: dim_t'(mm_k[l]), n: dim_t'(mm_n[l]), batch: 16'd1,
                            addr_a: mm_a[l], addr_b: mm_b[l], addr_c: mm_c[l]} : '0;
    end
    @(negedge clk); cfg_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!all_done) @(posedge clk);
    $display("MM layers done at cycle %0d (MM0 took %0d cycles)", cycles, mm0_end - mm0_start);
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < mm_m[l]; i++)
        for (int j = 0; j < mm_n[l]; j++) begin
          data_t e;
          e = '0;
          for (int k = 0; k < mm_k[l]; k++)
            e += u_mem.mem[mm_a[l] + i*mm_k[l] + k] * u_mem.mem[mm_b[l] + k*mm_n[l] + j];
          checks++;
          if (u_mem.mem[mm_c[l] + i*mm_n[l] + j] !== e) begin
            failures++;
            if (failures < 8) $display("MM%0d (%0d,%0d): got %0d exp %0d", l, i, j,
                                       u_mem.mem[mm_c[l] + i*mm_n[l] + j], e);
          end
        end
    checks += 4;
    if (n_pad[0] == 0) begin failures++; $display("MM0 never padded"); end
    if (n_pad[1] == 0) begin failures++; $display("MM1 never padded"); end
    if (n_cc == 0) begin failures++; $display("MM0 and MM1 never ran together"); end
    if (mm0_end - mm0_start < 8 * 4096) begin
      failures++; $display("MM0 faster than its compute bound: %0d cycles", mm0_end - mm0_start);
    end
    launch_vec(0, '{rows: 16'd1, cols: dim_t'(SMC), addr_in: SM_IN, addr_out: SM_OUT});
    launch_vec(1, '{rows: dim_t'(LNR), cols: dim_t'(LNC), addr_in: SM_IN, addr_out: LN_OUT});
    launch_vec(2, '{rows: dim_t'(TRR), cols: dim_t'(TRC), addr_in: mm_a[0], addr_out: TR_OUT});
    begin
      real mx, sum, e, y, mean, vr;
      mx = -1e30; sum = 0.0;
      for (int c = 0; c < SMC; c++) if (q2r(u_mem.mem[SM_IN+c]) > mx) mx = q2r(u_mem.mem[SM_IN+c]);
      for (int c = 0; c < SMC; c++) sum += $exp(q2r(u_mem.mem[SM_IN+c]) - mx);
      for (int c = 0; c < SMC; c++) begin
        e = $exp(q2r(u_mem.mem[SM_IN+c]) - mx) / sum;
        y = q2r(u_mem.mem[SM_OUT+c]);
        checks++;
        if (absr(y - e) > 0.002) begin failures++; $display("softmax %0d: %f vs %f", c, y, e); end
      end
      for (int r = 0; r < LNR; r++) begin
        mean = 0.0; vr = 0.0;
        for (int c = 0; c < LNC; c++) mean += q2r(u_mem.mem[SM_IN + r*LNC + c]) / LNC;
        for (int c = 0; c < LNC; c++) vr += (q2r(u_mem.mem[SM_IN + r*LNC + c]) - mean) ** 2 / LNC;
        for (int c = 0; c < LNC; c++) begin
          e = (q2r(u_mem.mem[SM_IN + r*LNC + c]) - mean) / $sqrt(vr + 1.0/65536.0);
          y = q2r(u_mem.mem[LN_OUT + r*LNC + c]);
          checks++;
          if (absr(y - e) > 0.01) begin failures++; $display("layernorm %0d,%0d: %f vs %f", r, c, y, e); end
        end
      end
    end
    for (int r = 0; r < TRR; r++)
      for (int c = 0; c < TRC; c++) begin
        checks++;
        if (u_mem.mem[TR_OUT + c*TRR + r] !== u_mem.mem[mm_a[0] + r*TRC + c]) failures++;
      end
    $display("total cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
