// tb_layernorm_acc: checks the layer-normalisation accelerator (rows of up
// to 64 values).
//
// Rows of Q16.16 values are normalised from a memory with random stalls and
// compared with (x - mean) / sqrt(var + 2^-16) computed in real arithmetic
// (tolerance 0.01). Inputs cover a zero-centred range, rows with a large
// offset, and narrow rows with small variance. The run time must stay within
// the stated rate of about 3*cols + 230 cycles per row (2x allowed for
// memory stalls).
module tb_layernorm_acc;
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

  layernorm_acc #(.MAXC(64)) dut (
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

  task automatic check_ln(int rows, int cols, real lo, real hi);
    addr_t ain = 32'h1000, aout = 32'h8000;
    longint took;
    for (int i = 0; i < rows*cols; i++)
      u_mem.mem[ain+i] = r2q(lo + (hi - lo) * ($urandom_range(10000) / 10000.0));
    for (int i = 0; i < rows*cols + 16; i++) u_mem.mem[aout+i] = 32'h5a5a5a5a;
    run_cmd(rows, cols, ain, aout, took);
    for (int r = 0; r < rows; r++) begin
      real mean, vr, y, e;
      mean = 0.0; vr = 0.0;
      for (int c = 0; c < cols; c++) mean += q2r(u_mem.mem[ain + r*cols + c]) / cols;
      for (int c = 0; c < cols; c++) vr += (q2r(u_mem.mem[ain + r*cols + c]) - mean) ** 2 / cols;
      for (int c = 0; c < cols; c++) begin
        e = (q2r(u_mem.mem[ain + r*cols + c]) - mean) / $sqrt(vr + 1.0/65536.0);
        y = q2r(u_mem.mem[aout + r*cols + c]);
        checks++;
        if (absr(y - e) > 0.01) begin
          failures++;
          if (failures < 10) $display("row %0d col %0d: got %f exp %f", r, c, y, e);
        end
      end
    end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[aout + rows*cols + i] !== 32'h5a5a5a5a) failures++;
    end
    checks++;
    if (took > 2 * rows * (3*cols + 230) + 50) begin
      failures++; $display("%0dx%0d took %0d cycles", rows, cols, took);
    end
    $display("%0dx%0d in [%f,%f]: %0d cycles", rows, cols, lo, hi, took);
  endtask

  initial begin
    cmd_valid = 1'b0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check_ln(4, 64, -3.0, 3.0);
    check_ln(3, 24, 500.0, 520.0);
    check_ln(2, 13, 0.5, 0.75);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
