// tb_mm_dma: checks the MM accelerator's DMA (tiling, padding, double
// buffering, accumulation of partial results and write-back).
//
// The DMA is wired to a small AIE partition (A=2, B=1, C=2 kernels of 8x8x8,
// CTC=2) and a behavioural memory with random stalls, using X=2, Y=2, Z=1 so
// the native tile is 32x16x16 and k is split into several steps. Products with
// sizes that are and are not multiples of the native tile are run and checked
// word by word; the stream monitors check that every packet on the LHS/RHS
// ports carries a header below CTC and exactly T*T payload words, and that
// the DMA writes exactly m*n*batch words (padding is never stored). The run
// time must respect the kernel compute bound (T^3/8 cycles per array round).
module tb_mm_dma;
  import charm_pkg::*;
  localparam int unsigned A = 2, B = 1, C = 2, X = 2, Y = 2, Z = 1, T = 8, CTC = 2;
  localparam int unsigned PL = (A*B + CTC - 1) / CTC;
  localparam int unsigned PR = (B*C + CTC - 1) / CTC;
  localparam int unsigned PO = (A*C + CTC - 1) / CTC;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, busy;
  mm_cmd_t cmd;
  logic rd_valid, rd_ready, rresp_valid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  data_t rresp_data, wr_data;
  logic ev_pad, ev_lo, ev_so;
  logic [PL-1:0] lv, lr;
  beat_t lb [PL];
  logic [PR-1:0] rv, rr;
  beat_t rb [PR];
  logic [PO-1:0] ov, orr;
  beat_t ob [PO];
  int checks = 0, failures = 0;
  int n_pad = 0, n_lo = 0, n_so = 0, n_wr = 0, n_lpk = 0;
  longint cycles = 0;

  mm_dma #(.A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z), .TI(T), .TK(T), .TJ(T), .CTC(CTC)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .busy,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .lhs_valid(lv), .lhs_ready(lr), .lhs_beat(lb),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_beat(rb),
    .out_valid(ov), .out_ready(orr), .out_beat(ob),
    .ev_pad, .ev_load_overlap(ev_lo), .ev_store_overlap(ev_so));

  mm_aie_array #(.A(A), .B(B), .C(C), .TI(T), .TK(T), .TJ(T), .CTC(CTC)) u_arr (
    .clk, .rst_n, .lhs_valid(lv), .lhs_ready(lr), .lhs_beat(lb),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_beat(rb),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

  mem_model #(.WORDS(1 << 16)) u_mem (
    .clk, .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always @(posedge clk) begin
    cycles++;
    if (ev_pad) n_pad++;
    if (ev_lo)  n_lo++;
    if (ev_so)  n_so++;
    if (wr_valid && wr_ready) n_wr++;
  end

  // Packet-format monitors on the LHS and RHS ports.
  for (genvar p = 0; p < PL + PR; p++) begin : g_mon
    int cnt = -1;
    logic  v, r;
    beat_t b;
    assign v = (p < PL) ? lv[p % PL] : rv[(p - PL) % PR];
    assign r = (p < PL) ? lr[p % PL] : rr[(p - PL) % PR];
    assign b = (p < PL) ? lb[p % PL] : rb[(p - PL) % PR];
    always @(posedge clk) if (v && r) begin
      if (cnt < 0) begin
        checks++;
        if (b.data >= CTC) begin failures++; $display("port %0d bad header %0d", p, b.data); end
        cnt = 0;
      end else begin
        cnt++;
        if (b.last) begin
          checks++;
          if (cnt != T*T) begin failures++; $display("port %0d packet of %0d words", p, cnt); end
          cnt = -1;
          n_lpk++;
        end
      end
    end
  end

  task automatic run_mm(int m, int k, int n, int batch);
    addr_t aa = 32'h0000, ab = 32'h4000, ac = 32'h8000;
    data_t ref_c;
    int wr0, pk0;
    longint c0;
    int rounds;
    for (int i = 0; i < batch*m*k; i++) u_mem.mem[aa+i] = data_t'($urandom_range(31)) - 15;
    for (int i = 0; i < batch*k*n; i++) u_mem.mem[ab+i] = data_t'($urandom_range(31)) - 15;
    for (int i = 0; i < batch*m*n + 16; i++) u_mem.mem[ac+i] = 32'h5a5a5a5a;
    cmd = '{m: dim_t'(m), k: dim_t'(k), n: dim_t'(n), batch: dim_t'(batch),
            addr_a: aa, addr_b: ab, addr_c: ac};
    wr0 = n_wr; pk0 = n_lpk; c0 = cycles;
    @(negedge clk);
    cmd_valid = 1'b1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(posedge clk);
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
              $display("MISMATCH %0dx%0dx%0d (%0d,%0d): got %0d exp %0d", m, k, n, i, j,
                       u_mem.mem[ac + bt*m*n + i*n + j], ref_c);
          end
        end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[ac + batch*m*n + i] !== 32'h5a5a5a5a) failures++;
    end
    checks++;
    if (n_wr - wr0 != batch*m*n) begin
      failures++; $display("wrote %0d words, expected %0d", n_wr - wr0, batch*m*n);
    end
    // Every array round feeds A*B LHS and B*C RHS packets.
    rounds = batch * ((m + X*A*T - 1) / (X*A*T)) * ((n + Z*C*T - 1) / (Z*C*T))
           * ((k + Y*B*T - 1) / (Y*B*T)) * X * Y * Z;
    checks++;
    if (n_lpk - pk0 != rounds * (A*B + B*C)) begin
      failures++; $display("%0d packets, expected %0d", n_lpk - pk0, rounds * (A*B + B*C));
    end
    checks++;
    if (cycles - c0 < rounds * (T*T*T/8)) begin
      failures++; $display("%0d cycles beat the compute bound", cycles - c0);
    end
    $display("%0dx%0dx%0d batch %0d: %0d rounds, %0d cycles", m, k, n, batch, rounds, cycles - c0);
  endtask

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_mm(64, 32, 32, 1);
    run_mm(27, 21, 41, 1);
    run_mm(32, 48, 16, 2);
    checks++; if (n_pad == 0) begin failures++; $display("padding never happened"); end
    checks++; if (n_lo == 0)  begin failures++; $display("load overlap never happened"); end
    checks++; if (n_so == 0)  begin failures++; $display("store overlap never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
