// tb_crts_scheduler: checks the runtime scheduler with model accelerators.
//
// Two runs, each with a random pool: 4 tasks x 8 layers, some entries absent,
// each present layer assigned to one of 2 accelerators and depending on a
// random subset of earlier layers of its task. The model accelerators accept
// a command after a random delay and report done a random time later. The
// command carries its (task, layer) in the m field. Checks: every present
// entry is issued exactly once, on its own accelerator, only after all of its
// dependencies finished; all_done comes once, after the last finish; an idle
// accelerator with a ready layer gets a command within 2 cycles (dispatch
// rate); both accelerators run concurrently and dependency waits occur.
module tb_crts_scheduler;
  import charm_pkg::*;
  localparam int unsigned NA = 2, NT = 4, NL = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_valid, start, running, all_done;
  logic [1:0] cfg_task;
  logic [2:0] cfg_layer;
  logic [0:0] cfg_acc;
  logic [NL-1:0] cfg_deps;
  mm_cmd_t cfg_cmd;
  logic [NA-1:0] cv, cr, dn, ev_dw;
  mm_cmd_t acmd [NA];
  logic ev_conc;
  int checks = 0, failures = 0;

  crts_scheduler #(.NUM_ACC(NA), .NUM_TASKS(NT), .NUM_LAYERS(NL)) dut (
    .clk, .rst_n, .cfg_we, .cfg_task, .cfg_layer, .cfg_valid, .cfg_acc, .cfg_deps, .cfg_cmd,
    .start, .running, .all_done, .acc_cmd_valid(cv), .acc_cmd_ready(cr), .acc_cmd(acmd),
    .acc_done(dn), .ev_dep_wait(ev_dw), .ev_concurrent(ev_conc));

  bit          present [NT][NL];
  int          accof   [NT][NL];
  bit [NL-1:0] depsof  [NT][NL];
  int          n_issue [NT][NL];
  bit          fin     [NT][NL];
  int n_done_pulse = 0, n_conc = 0, n_dw = 0;
  longint cycles = 0;

  // Model accelerators.
  bit busy_a [NA];
  int cur_t [NA], cur_l [NA];
  int idle_ready_cycles [NA];
  for (genvar a = 0; a < NA; a++) begin : g_acc
    initial begin
      cr[a] = 0; dn[a] = 0; busy_a[a] = 0;
      forever begin
        @(negedge clk);
        cr[a] = ($urandom_range(2) == 0) ? 1'b0 : 1'b1;
        #1;
        if (cv[a] && cr[a]) begin
          automatic int t = acmd[a].m / 16, l = acmd[a].m % 16;
          checks++;
          if (t >= NT || l >= NL || !present[t][l] || accof[t][l] != a) begin
            failures++; $display("acc %0d got bad command t%0d l%0d", a, t, l);
          end else begin
            n_issue[t][l]++;
            for (int d = 0; d < NL; d++)
              if (depsof[t][l][d] && !fin[t][d]) begin
                failures++; $display("t%0d l%0d issued before dependency l%0d finished", t, l, d);
              end
          end
          cur_t[a] = t; cur_l[a] = l; busy_a[a] = 1;
          @(posedge clk);
          @(negedge clk) cr[a] = 0;
          repeat ($urandom_range(1, 30)) @(negedge clk);
          if (t < NT && l < NL) fin[t][l] = 1;
          busy_a[a] = 0;
          dn[a] = 1;
          @(negedge clk) dn[a] = 0;
        end
      end
    end
  end

  // Dispatch-rate check: an idle accelerator must not sit for more than a few
  // cycles while a layer for it is ready and unissued. The cycle after a
  // finish and the random ready drops are allowed for.
  always @(posedge clk) begin
    cycles++;
    if (ev_conc) n_conc++;
    if (|ev_dw) n_dw++;
    if (all_done) n_done_pulse++;
    if (running)
      for (int a = 0; a < NA; a++) begin
        automatic bit rdy = 0;
        for (int t = 0; t < NT; t++)
          for (int l = 0; l < NL; l++)
            if (present[t][l] && accof[t][l] == a && n_issue[t][l] == 0) begin
              automatic bit ok = 1;
              for (int d = 0; d < NL; d++) if (depsof[t][l][d] && !fin[t][d]) ok = 0;
              if (ok) rdy = 1;
            end
        if (!busy_a[a] && rdy && !cv[a]) idle_ready_cycles[a]++;
        else idle_ready_cycles[a] = 0;
        if (idle_ready_cycles[a] > 3) begin
          failures++; $display("acc %0d idle with a ready layer at cycle %0d", a, cycles);
          idle_ready_cycles[a] = 0;
        end
      end
  end

  task automatic run_pool();
    int npres = 0;
    longint t_last;
    @(negedge clk);
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++) begin
        present[t][l] = ($urandom_range(5) != 0);
        accof[t][l]   = $urandom_range(NA-1);
        depsof[t][l]  = '0;
        for (int d = 0; d < l; d++) if ($urandom_range(2) == 0) depsof[t][l][d] = 1'b1;
        n_issue[t][l] = 0;
        fin[t][l]     = 0;
        if (present[t][l]) npres++;
      end
    // Dependencies on absent layers are dropped so the pool is consistent.
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++)
        for (int d = 0; d < NL; d++) if (!present[t][d]) depsof[t][l][d] = 1'b0;
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++) begin
        cfg_we = 1; cfg_task = t; cfg_layer = l; cfg_valid = present[t][l];
        cfg_acc = accof[t][l]; cfg_deps = depsof[t][l];
        cfg_cmd = '0; cfg_cmd.m = dim_t'(t*16 + l);
        @(negedge clk);
      end
    cfg_we = 0;
    n_done_pulse = 0;
    start = 1;
    @(negedge clk) start = 0;
    while (!all_done) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++) begin
        checks++;
        if (n_issue[t][l] != (present[t][l] ? 1 : 0)) begin
          failures++; $display("t%0d l%0d issued %0d times", t, l, n_issue[t][l]);
        end
        checks++;
        if (fin[t][l] != present[t][l]) begin failures++; $display("t%0d l%0d not finished", t, l); end
      end
    checks++;
    if (n_done_pulse != 1) begin failures++; $display("all_done pulsed %0d times", n_done_pulse); end
    checks++;
    if (running) begin failures++; $display("still running"); end
    $display("pool with %0d layers done", npres);
  endtask

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_task = 0; cfg_layer = 0; cfg_acc = 0; cfg_deps = 0;
    cfg_cmd = '0; start = 0;
    for (int a = 0; a < NA; a++) idle_ready_cycles[a] = 0;
    for (int t = 0; t < NT; t++) for (int l = 0; l < NL; l++) present[t][l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pool();
    run_pool();
    checks++; if (n_conc == 0) begin failures++; $display("never concurrent"); end
    checks++; if (n_dw == 0)   begin failures++; $display("never waited on a dependency"); end
    $display("concurrent cycles=%0d dep-wait cycles=%0d", n_conc, n_dw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
