// tb_transpose_acc: checks the transpose accelerator (8x8 tile buffer).
//
// Transposes matrices of several shapes, including ones that are not
// multiples of the tile and a single row, from a memory with random stalls.
// Every output word is compared with the input, the words after the output
// are checked to be untouched, and the run time must match the stated rate:
// at least 2*TB*TB cycles per tile (one visit per position to load and one to
// store), and at most that plus read latency per tile and one extra cycle per
// word moved for memory stalls.
module tb_transpose_acc;
  import charm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  vec_cmd_t cmd;
  logic rd_valid, rd_ready, rresp_valid, wr_valid, wr_ready;
  addr_t rd_addr, wr_addr;
  data_t rresp_data, wr_data;
  int checks = 0, failures = 0;
  longint cycles = 0;

  transpose_acc #(.TB(8)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done,
    .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  mem_model #(.WORDS(1 << 16)) u_mem (
    .clk, .rd_valid, .rd_ready, .rd_addr, .rresp_valid, .rresp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always @(posedge clk) cycles++;

  function automatic real q2r(data_t v); return real'(v) / 65536.0; endfunction
  function automatic data_t r2q(real v); return data_t'($rtoi(v * 65536.0)); endfunction
  function automatic real absr(real v); return (v < 0.0) ? -v : v; endfunction

  // Issue one command and wait for done; returns the cycles taken.
  task automatic run_cmd(int rows, int cols, addr_t ain, addr_t aout, output longint took);
    longint c0;
    cmd = '{rows: dim_t'(rows), cols: dim_t'(cols), addr_in: ain, addr_out: aout};
    @(negedge clk);
    c0 = cycles;
    cmd_valid = 1'b1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!done) @(posedge clk);
    took = cycles - c0;
    @(negedge clk);
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_tr(int rows, int cols);
    addr_t ain = 32'h1000, aout = 32'h8000;
    longint took;
    int tiles;
    for (int i = 0; i < rows*cols; i++) u_mem.mem[ain+i] = data_t'($urandom);
    for (int i = 0; i < rows*cols + 16; i++) u_mem.mem[aout+i] = 32'h5a5a5a5a;
    run_cmd(rows, cols, ain, aout, took);
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        checks++;
        if (u_mem.mem[aout + c*rows + r] !== u_mem.mem[ain + r*cols + c]) begin
          failures++;
          if (failures < 10) $display("%0dx%0d: (%0d,%0d) wrong", rows, cols, r, c);
        end
      end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[aout + rows*cols + i] !== 32'h5a5a5a5a) failures++;
    end
    tiles = ((rows + 7) / 8) * ((cols + 7) / 8);
    checks++;
    if (took > tiles * (2*64 + 20) + 2*rows*cols + 50 || took < tiles * 2*64) begin
      failures++; $display("%0dx%0d took %0d cycles", rows, cols, took);
    end
    $display("%0dx%0d: %0d cycles", rows, cols, took);
  endtask

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check_tr(16, 24);
    check_tr(21, 11);
    check_tr(1, 30);
    check_tr(37, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
