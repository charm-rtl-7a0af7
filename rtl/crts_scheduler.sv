// crts_scheduler: runtime scheduler that dispatches the MM layers of several
// concurrent tasks onto the MM accelerators.
//
// The task pool holds NUM_TASKS x NUM_LAYERS entries. Each entry names the
// accelerator the layer was assigned to, the set of earlier layers of the
// same task it depends on, and the MM command to issue. Two processes run
// side by side, as in the paper's scheduler:
//   dispatch - every idle accelerator scans the pool in task order, then layer
//              order, and takes the first entry that is assigned to it, not
//              yet issued and whose predecessors have all finished;
//   retire   - when an accelerator reports done, its layer is marked
//              finished (which may release successors) and it becomes idle.
// Interface: cfg_we writes one pool entry; start begins a run over all valid
// entries; per accelerator a command channel (valid/ready) and a done input;
// all_done pulses when every valid entry has finished. ev_dep_wait is high
// for an accelerator that is idle while its unissued layers are all blocked
// by dependencies; ev_concurrent is high while two or more accelerators run.
// Timing: an idle accelerator gets its command the cycle after a ready layer
// exists; a finish is visible to the dispatcher one cycle after `done`.
// The algorithm follows the paper, which runs it in software on the host
// CPU; building it as logic, and the pool format, are this design's choices.
module crts_scheduler
  import charm_pkg::*;
#(
  parameter int unsigned NUM_ACC    = 2,
  parameter int unsigned NUM_TASKS  = 4,
  parameter int unsigned NUM_LAYERS = 8,
  localparam int unsigned AW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1,
  localparam int unsigned TW = (NUM_TASKS > 1) ? $clog2(NUM_TASKS) : 1,
  localparam int unsigned LW = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // pool configuration
  input  logic                  cfg_we,
  input  logic [TW-1:0]         cfg_task,
  input  logic [LW-1:0]         cfg_layer,
  input  logic                  cfg_valid,      // entry present in the pool
  input  logic [AW-1:0]         cfg_acc,
  input  logic [NUM_LAYERS-1:0] cfg_deps,
  input  mm_cmd_t               cfg_cmd,
  input  logic                  start,
  output logic                  running,
  output logic                  all_done,
  // accelerators
  output logic [NUM_ACC-1:0]    acc_cmd_valid,
  input  logic [NUM_ACC-1:0]    acc_cmd_ready,
  output mm_cmd_t               acc_cmd [NUM_ACC],
  input  logic [NUM_ACC-1:0]    acc_done,
  output logic [NUM_ACC-1:0]    ev_dep_wait,
  output logic                  ev_concurrent
);
  typedef struct packed {
    logic                  valid;
    logic [AW-1:0]         acc;
    logic [NUM_LAYERS-1:0] deps;
    mm_cmd_t               cmd;
  } entry_t;

  entry_t pool [NUM_TASKS][NUM_LAYERS];
  logic [NUM_LAYERS-1:0] issued   [NUM_TASKS];
  logic [NUM_LAYERS-1:0] finished [NUM_TASKS];

  typedef enum logic [1:0] {A_IDLE, A_ISSUE, A_RUN} astate_e;
  astate_e       ast   [NUM_ACC];
  logic [TW-1:0] cur_t [NUM_ACC];
  logic [LW-1:0] cur_l [NUM_ACC];

  // dispatch search
  logic          found [NUM_ACC];
  logic          pend  [NUM_ACC];
  logic [TW-1:0] pick_t [NUM_ACC];
  logic [LW-1:0] pick_l [NUM_ACC];

  always_comb begin
    for (int a = 0; a < NUM_ACC; a++) begin
      found[a]  = 1'b0;
      pend[a]   = 1'b0;
      pick_t[a] = '0;
      pick_l[a] = '0;
      for (int t = 0; t < NUM_TASKS; t++) begin
        for (int l = 0; l < NUM_LAYERS; l++) begin
          if (pool[t][l].valid && !issued[t][l] && int'(pool[t][l].acc) == a) begin
            pend[a] = 1'b1;
            if (!found[a] && ((pool[t][l].deps & ~finished[t]) == '0)) begin
              found[a]  = 1'b1;
              pick_t[a] = TW'(t);
              pick_l[a] = LW'(l);
            end
          end
        end
      end
    end
  end

  logic all_fin;
  always_comb begin
    all_fin = 1'b1;
    for (int t = 0; t < NUM_TASKS; t++)
      for (int l = 0; l < NUM_LAYERS; l++)
        if (pool[t][l].valid && !finished[t][l]) all_fin = 1'b0;
  end

  always_comb begin
    int nrun;
    nrun = 0;
    for (int a = 0; a < NUM_ACC; a++) begin
      acc_cmd_valid[a] = (ast[a] == A_ISSUE);
      acc_cmd[a]       = pool[cur_t[a]][cur_l[a]].cmd;
      ev_dep_wait[a]   = running && (ast[a] == A_IDLE) && pend[a] && !found[a];
      if (ast[a] != A_IDLE) nrun++;
    end
    ev_concurrent = (nrun >= 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      all_done <= 1'b0;
      for (int t = 0; t < NUM_TASKS; t++) begin
        issued[t]   <= '0;
        finished[t] <= '0;
        for (int l = 0; l < NUM_LAYERS; l++) pool[t][l] <= '0;
      end
      for (int a = 0; a < NUM_ACC; a++) begin
        ast[a]   <= A_IDLE;
        cur_t[a] <= '0;
        cur_l[a] <= '0;
      end
    end else begin
      all_done <= 1'b0;
      if (cfg_we && !running)
        pool[cfg_task][cfg_layer] <= '{valid: cfg_valid, acc: cfg_acc, deps: cfg_deps, cmd: cfg_cmd};
      if (start && !running) begin
        running <= 1'b1;
        for (int t = 0; t < NUM_TASKS; t++) begin
          issued[t]   <= '0;
          finished[t] <= '0;
        end
      end else if (running) begin
        for (int a = 0; a < NUM_ACC; a++) begin
          unique case (ast[a])
            A_IDLE: if (found[a]) begin
              ast[a]   <= A_ISSUE;
              cur_t[a] <= pick_t[a];
              cur_l[a] <= pick_l[a];
              issued[pick_t[a]][pick_l[a]] <= 1'b1;
            end
            A_ISSUE: if (acc_cmd_ready[a]) ast[a] <= A_RUN;
            A_RUN: if (acc_done[a]) begin
              finished[cur_t[a]][cur_l[a]] <= 1'b1;
              ast[a] <= A_IDLE;
            end
            default: ast[a] <= A_IDLE;
          endcase
        end
        if (all_fin) begin
          running  <= 1'b0;
          all_done <= 1'b1;
        end
      end
    end
  end

  // A done may only come from an accelerator that runs a layer.
  for (genvar a = 0; a < NUM_ACC; a++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) acc_done[a] |-> ast[a] == A_RUN);
  end

endmodule
