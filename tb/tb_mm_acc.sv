// tb_mm_acc: checks one MM accelerator end to end against a reference product.
//
// A small accelerator (A=2, B=2, C=2 kernels of 8x8x8, X=Y=Z=2, so the native
// tile is 32x32x32) runs three commands: a product that is an exact multiple
// of the native tile with several k0 steps, a product whose sizes are not
// multiples of it (padding), and a batch of two. Each result is compared word
// by word with a product computed here, and the words around C are checked to
// be untouched. The events for padding and for load/store overlap must occur.
module tb_mm_acc;
  import charm_pkg::*;
  localparam int unsigned A = 2, B = 2, C = 2, X = 2, Y = 2, Z = 2, T = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, busy;
  mm_cmd_t cmd;
  logic rd_valid, rd_ready, rresp_valid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  data_t rresp_data, wr_data;
  logic ev_pad, ev_lo, ev_so;
  int checks = 0, failures = 0;
  int n_pad = 0, n_lo = 0, n_so = 0;
  longint cycles = 0;

  mm_acc #(.A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z), .TI(T), .TK(T), .TJ(T)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .busy,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .ev_pad, .ev_load_overlap(ev_lo), .ev_store_overlap(ev_so));

  mem_model #(.WORDS(1 << 16)) u_mem (
    .clk, .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always @(posedge clk) begin
    cycles++;
    if (ev_pad) n_pad++;
    if (ev_lo)  n_lo++;
    if (ev_so)  n_so++;
  end

  task automatic run_mm(int m, int k, int n, int batch);
    addr_t aa = 32'h0000, ab = 32'h4000, ac = 32'h8000;
    data_t ref_c;
    for (int i = 0; i < batch*m*k; i++) u_mem.mem[aa+i] = data_t'($urandom_range(15)) - 7;
    for (int i = 0; i < batch*k*n; i++) u_mem.mem[ab+i] = data_t'($urandom_range(15)) - 7;
    for (int i = 0; i < batch*m*n + 64; i++) u_mem.mem[ac+i] = 32'h5a5a5a5a;
    cmd = '{m: dim_t'(m), k: dim_t'(k), n: dim_t'(n), batch: dim_t'(batch),
            addr_a: aa, addr_b: ab, addr_c: ac};
    @(negedge clk);
    cmd_valid = 1'b1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 1'b0;
    do @(posedge clk); while (!done);
    @(negedge clk);
    for (int bt = 0; bt < batch; bt++)
      for (int i = 0; i < m; i++)
        for (int j = 0; j < n; j++) begin
          ref_c = '0;
          for (int kk = 0; kk < k; kk++)
            ref_c += u_mem.mem[aa + bt*m*k + i*k + kk] * u_mem.mem[ab + bt*k*n + kk*n + j];
          checks++;
          if (u_mem.mem[ac + bt*m*n + i*n + j] !== ref_c) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH %0dx%0dx%0d b%0d (%0d,%0d): got %0d exp %0d", m, k, n, bt, i, j,
                       u_mem.mem[ac + bt*m*n + i*n + j], ref_c);
          end
        end
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (u_mem.mem[ac + batch*m*n + i] !== 32'h5a5a5a5a) failures++;
    end
  endtask

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_mm(64, 64, 32, 1);     // 2x2x1 native tiles, two k0 steps
    run_mm(20, 40, 36, 1);     // padded in every dimension
    run_mm(32, 16, 32, 2);     // batch of two, K smaller than the tile
    checks++; if (n_pad == 0) begin failures++; $display("padding never happened"); end
    checks++; if (n_lo == 0)  begin failures++; $display("load/compute overlap never happened"); end
    checks++; if (n_so == 0)  begin failures++; $display("store/compute overlap never happened"); end
    $display("events: pad=%0d load_overlap=%0d store_overlap=%0d cycles=%0d", n_pad, n_lo, n_so, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
