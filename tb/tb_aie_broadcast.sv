// tb_aie_broadcast: checks the circuit-switched broadcast.
//
// Streams 500 random words into a 4-way broadcast while each receiver drops
// ready at random on its own. Every receiver must see every word exactly
// once and in order, and the source must only advance when all have it.
module tb_aie_broadcast;
  import charm_pkg::*;
  localparam int unsigned NO = 4, NW = 500;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic iv, ir;
  beat_t ib, ob;
  logic [NO-1:0] ov, orr;
  int checks = 0, failures = 0;
  data_t words [NW];
  int got [NO];

  aie_broadcast #(.NOUT(NO)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_beat(ib),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

  initial begin
    iv = 0; ib = '0;
    for (int i = 0; i < NW; i++) words[i] = data_t'($urandom);
    for (int r = 0; r < NO; r++) got[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      @(negedge clk); iv = 1; ib = '{data: words[i], last: (i == NW-1)};
      #1;
      while (!ir) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); iv = 0;
    repeat (20) @(posedge clk);
    for (int r = 0; r < NO; r++) begin
      checks++;
      if (got[r] != NW) begin failures++; $display("receiver %0d got %0d words", r, got[r]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) orr <= NO'($urandom);
  always @(posedge clk) begin
    for (int r = 0; r < NO; r++)
      if (ov[r] && orr[r]) begin
        checks++;
        if (got[r] >= NW || ob.data !== words[got[r]]) begin
          failures++;
          if (failures < 5) $display("receiver %0d word %0d wrong", r, got[r]);
        end
        got[r]++;
      end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
