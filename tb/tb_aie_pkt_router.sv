// tb_aie_pkt_router: checks packet-switched scatter over one port.
//
// Sends 200 packets with random destinations (including one out-of-range ID
// that must be dropped) and random lengths, with random back-pressure on the
// outputs. Every payload word must arrive, in order, only at the destination
// named by its packet's header, with `last` on the final word.
module tb_aie_pkt_router;
  import charm_pkg::*;
  localparam int unsigned ND = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic iv, ir;
  beat_t ib, ob;
  logic [ND-1:0] ov, orr;
  int checks = 0, failures = 0;

  aie_pkt_router #(.NDEST(ND)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_beat(ib),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

  beat_t expq [ND][$];
  int sent_words = 0, got_words = 0, dropped = 0;

  initial begin
    iv = 0; ib = '0; orr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      int d, len;
      d = (p == 7) ? ND + 1 : $urandom_range(ND-1);
      len = $urandom_range(1, 9);
      for (int w = 0; w <= len; w++) begin
        beat_t b;
        b.data = (w == 0) ? data_t'(d) : data_t'($urandom);
        b.last = (w == len);
        if (w > 0 && d < ND) begin expq[d].push_back(b); sent_words++; end
        if (w > 0 && d >= ND) dropped++;
        @(negedge clk); iv = 1; ib = b;
        #1;
        while (!ir) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk); iv = 0;
    end
    repeat (50) @(posedge clk);
    checks++;
    if (got_words != sent_words) begin failures++; $display("got %0d of %0d words", got_words, sent_words); end
    checks++; if (dropped == 0) begin failures++; $display("nothing dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receivers with random readiness; check at the negedge phase
  always @(negedge clk) begin
    orr <= ND'($urandom);
  end
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (ov[d] && orr[d]) begin
        checks++;
        if (expq[d].size() == 0 || expq[d][0] !== ob) begin
          failures++;
          if (failures < 5) $display("dest %0d unexpected beat %h", d, ob);
        end else begin
          void'(expq[d].pop_front());
        end
        got_words++;
      end
    end
    checks++;
    if ($countones(ov) > 1) begin failures++; $display("two outputs valid"); end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
