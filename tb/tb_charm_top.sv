// tb_charm_top: end-to-end test of the CHARM system at reduced size.
//
// Two tasks of the BERT encoder layer graph run on the two MM accelerators:
// eight MM layers per task with the dependencies 0->6, 1->6, 6->7, 2->7,
// 7->3->4->5; layers 0-5 go to MM0 and 6-7 to MM1. A dependent layer reads
// the results of the layers it depends on, so a dependency the scheduler
// ignored would show up as a wrong product. All sizes are 40 and not
// multiples of either native tile, so both accelerators pad. After the MM
// work the host launches softmax, layer normalisation and both transposes.
// Every result is compared with values computed here; the mechanisms that
// must happen at least once are counted (padding, load and store overlap in
// each MM accelerator, dependency waits, both MM accelerators busy at once).
module tb_charm_top;
  import charm_pkg::*;
  localparam int unsigned T = 8;
  localparam int unsigned NT = 2, NL = 8;
  localparam int unsigned S = 40;            // matrix size of every MM layer
  localparam int unsigned SZ = S*S;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_valid, cfg_acc, start, running, all_done;
  logic [0:0] cfg_task;
  logic [2:0] cfg_layer;
  logic [NL-1:0] cfg_deps;
  mm_cmd_t cfg_cmd;
  logic [3:0] vcmd_valid, vcmd_ready, vdone;
  vec_cmd_t vcmd [4];
  logic [5:0] rd_valid, rd_ready, rresp_valid, wr_valid, wr_ready;
  addr_t rd_addr [6], wr_addr [6];
  data_t rresp_data [6], wr_data [6];
  logic [1:0] ev_pad, ev_lo, ev_so, ev_dw;
  logic ev_cc;

  charm_top #(.A0(2), .B0(2), .C0(2), .X0(2), .Y0(1), .Z0(2),
              .A1(1), .B1(2), .C1(2), .X1(1), .Y1(1), .Z1(1),
              .TI(T), .TK(T), .TJ(T), .NUM_TASKS(NT), .NUM_LAYERS(NL),
              .MAXC(64), .TB(8)) dut (
    .clk, .rst_n, .cfg_we, .cfg_task, .cfg_layer, .cfg_valid, .cfg_acc, .cfg_deps, .cfg_cmd,
    .start, .running, .all_done, .vcmd_valid, .vcmd_ready, .vcmd, .vdone,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .ev_pad, .ev_load_overlap(ev_lo), .ev_store_overlap(ev_so), .ev_dep_wait(ev_dw),
    .ev_concurrent(ev_cc));

  mem_shared #(.WORDS(1 << 16), .NCH(6)) u_mem (
    .clk, .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  int n_pad [2], n_lo [2], n_so [2], n_dw = 0, n_cc = 0, n_vdone = 0;
  initial for (int i = 0; i < 2; i++) begin n_pad[i] = 0; n_lo[i] = 0; n_so[i] = 0; end
  always @(posedge clk) begin
    for (int i = 0; i < 2; i++) begin
      if (ev_pad[i]) n_pad[i]++;
      if (ev_lo[i])  n_lo[i]++;
      if (ev_so[i])  n_so[i]++;
    end
    if (|ev_dw) n_dw++;
    if (ev_cc)  n_cc++;
    n_vdone += $countones(vdone);
  end

  // Memory layout per task t: region base(t) holds, for layer l, an
  // "input" matrix IN[l] and the result OUT[l], each S x S.
  function automatic addr_t in_addr(int t, int l);  return addr_t'(t*16*SZ + l*SZ); endfunction
  function automatic addr_t out_addr(int t, int l); return addr_t'(t*16*SZ + (8+l)*SZ); endfunction

  // operands of layer l: {lhs, rhs}
  function automatic addr_t lhs_of(int t, int l);
    case (l)
      6: return out_addr(t, 0);
      7: return out_addr(t, 6);
      3: return out_addr(t, 7);
      4: return out_addr(t, 3);
      5: return out_addr(t, 4);
      default: return in_addr(t, l);   // 0, 1, 2 use their own input as LHS
    endcase
  endfunction
  function automatic addr_t rhs_of(int t, int l);
    case (l)
      6: return out_addr(t, 1);
      7: return out_addr(t, 2);
      0, 1, 2: return in_addr(t, 7 - l);  // layers 5, 6, 7 own inputs unused otherwise
      default: return in_addr(t, l);
    endcase
  endfunction
  function automatic logic [NL-1:0] deps_of(int l);
    case (l)
      6: return 8'b0000_0011;
      7: return 8'b0100_0100;
      3: return 8'b1000_0000;
      4: return 8'b0000_1000;
      5: return 8'b0001_0000;
      default: return '0;
    endcase
  endfunction

  data_t refm [NT][NL][SZ];
  data_t shadow [1 << 16];

  task automatic ref_layer(int t, int l);
    addr_t la = lhs_of(t, l), ra = rhs_of(t, l), oa = out_addr(t, l);
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        data_t acc = '0;
        for (int k = 0; k < S; k++) acc += shadow[la + i*S + k] * shadow[ra + k*S + j];
        refm[t][l][i*S+j] = acc;
      end
    for (int i = 0; i < SZ; i++) shadow[oa + i] = refm[t][l][i];
  endtask

  task automatic launch_vec(int i, vec_cmd_t c);
    @(negedge clk);
    vcmd[i] = c; vcmd_valid[i] = 1'b1;
    do @(posedge clk); while (!vcmd_ready[i]);
    @(negedge clk);
    vcmd_valid[i] = 1'b0;
    do @(posedge clk); while (!vdone[i]);
  endtask

  function automatic real q2r(data_t v); return real'(v) / 65536.0; endfunction
  function automatic data_t r2q(real v); return data_t'($rtoi(v * 65536.0)); endfunction

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_acc = 0; start = 0; cfg_task = '0; cfg_layer = '0;
    cfg_deps = '0; cfg_cmd = '0; vcmd_valid = '0;
    for (int i = 0; i < 4; i++) vcmd[i] = '0;
    for (int i = 0; i < (1 << 16); i++) begin
      u_mem.mem[i] = data_t'($urandom_range(6)) - 3;
      shadow[i] = u_mem.mem[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // fill the task pool
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++) begin
        @(negedge clk);
        cfg_we = 1; cfg_task = t[0:0]; cfg_layer = l[2:0]; cfg_valid = 1;
        cfg_acc = (l >= 6); cfg_deps = deps_of(l);
        cfg_cmd = '{m: dim_t'(S), k: dim_t'(S), n: dim_t'(S), batch: 16'd1,
                    addr_a: lhs_of(t, l), addr_b: rhs_of(t, l), addr_c: out_addr(t, l)};
      end
    @(negedge clk); cfg_we = 0; start = 1;
    @(negedge clk); start = 0;
    do @(posedge clk); while (!all_done);
    // reference in a topological order
    for (int t = 0; t < NT; t++) begin
      ref_layer(t, 0); ref_layer(t, 1); ref_layer(t, 6); ref_layer(t, 2);
      ref_layer(t, 7); ref_layer(t, 3); ref_layer(t, 4); ref_layer(t, 5);
    end
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++)
        for (int i = 0; i < SZ; i++) begin
          checks++;
          if (u_mem.mem[out_addr(t, l) + i] !== refm[t][l][i]) begin
            failures++;
            if (failures < 8) $display("MM mismatch task %0d layer %0d word %0d: got %0d exp %0d",
                                       t, l, i, u_mem.mem[out_addr(t, l) + i], refm[t][l][i]);
          end
        end
    // non-MM accelerators, working on a scratch area at 0xC000
    for (int i = 0; i < 4*24; i++) u_mem.mem[16'hC000 + i] = r2q(($urandom_range(4000) / 1000.0) - 2.0);
    launch_vec(0, '{rows: 16'd4, cols: 16'd24, addr_in: 32'hC000, addr_out: 32'hC100});
    launch_vec(1, '{rows: 16'd4, cols: 16'd24, addr_in: 32'hC000, addr_out: 32'hC200});
    launch_vec(2, '{rows: 16'd20, cols: 16'd13, addr_in: 32'h0, addr_out: 32'hD000});
    launch_vec(3, '{rows: 16'd9, cols: 16'd17, addr_in: 32'h400, addr_out: 32'hE000});
    repeat (2) @(posedge clk);
    for (int r = 0; r < 4; r++) begin
      real mx, sum, mean, vr, e;
      mx = -1e9; sum = 0; mean = 0; vr = 0;
      for (int c = 0; c < 24; c++) if (q2r(u_mem.mem[16'hC000 + r*24 + c]) > mx) mx = q2r(u_mem.mem[16'hC000 + r*24 + c]);
      for (int c = 0; c < 24; c++) sum += $exp(q2r(u_mem.mem[16'hC000 + r*24 + c]) - mx);
      for (int c = 0; c < 24; c++) mean += q2r(u_mem.mem[16'hC000 + r*24 + c]) / 24.0;
      for (int c = 0; c < 24; c++) vr += (q2r(u_mem.mem[16'hC000 + r*24 + c]) - mean) ** 2 / 24.0;
      for (int c = 0; c < 24; c++) begin
        real x, ys, yl;
        x  = q2r(u_mem.mem[16'hC000 + r*24 + c]);
        ys = $exp(x - mx) / sum;
        yl = (x - mean) / $sqrt(vr + 1.0/65536.0);
        checks += 2;
        if ((q2r(u_mem.mem[16'hC100 + r*24 + c]) - ys) > 0.002 || (ys - q2r(u_mem.mem[16'hC100 + r*24 + c])) > 0.002) begin
          failures++; $display("softmax r%0d c%0d got %f exp %f", r, c, q2r(u_mem.mem[16'hC100 + r*24 + c]), ys);
        end
        if ((q2r(u_mem.mem[16'hC200 + r*24 + c]) - yl) > 0.01 || (yl - q2r(u_mem.mem[16'hC200 + r*24 + c])) > 0.01) begin
          failures++; $display("layernorm r%0d c%0d got %f exp %f", r, c, q2r(u_mem.mem[16'hC200 + r*24 + c]), yl);
        end
      end
    end
    for (int r = 0; r < 20; r++) for (int c = 0; c < 13; c++) begin
      checks++; if (u_mem.mem[16'hD000 + c*20 + r] !== u_mem.mem[r*13 + c]) failures++;
    end
    for (int r = 0; r < 9; r++) for (int c = 0; c < 17; c++) begin
      checks++; if (u_mem.mem[16'hE000 + c*9 + r] !== u_mem.mem[16'h400 + r*17 + c]) failures++;
    end
    // mechanisms
    for (int i = 0; i < 2; i++) begin
      checks += 3;
      if (n_pad[i] == 0) begin failures++; $display("MM%0d never padded", i); end
      if (n_lo[i] == 0)  begin failures++; $display("MM%0d never overlapped load and compute", i); end
      if (n_so[i] == 0)  begin failures++; $display("MM%0d never overlapped store and compute", i); end
    end
    checks += 3;
    if (n_dw == 0)    begin failures++; $display("no dependency wait"); end
    if (n_cc == 0)    begin failures++; $display("MM accelerators never ran concurrently"); end
    if (n_vdone != 4) begin failures++; $display("non-MM done count %0d", n_vdone); end
    $display("events: pad=%0d/%0d load_ovl=%0d/%0d store_ovl=%0d/%0d dep_wait=%0d concurrent=%0d",
             n_pad[0], n_pad[1], n_lo[0], n_lo[1], n_so[0], n_so[1], n_dw, n_cc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
