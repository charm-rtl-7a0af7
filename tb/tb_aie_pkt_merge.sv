// tb_aie_pkt_merge: checks the packet-switched gather.
//
// Four sources each send 30 packets of random length, with random gaps; the
// sink drops ready at random. On the shared output every packet must start
// with a header naming its source, followed by that source's next packet
// intact (no interleaving), ending with `last`; all packets must arrive, and
// every source must be served (round robin).
module tb_aie_pkt_merge;
  import charm_pkg::*;
  localparam int unsigned NS = 4, NP = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [NS-1:0] iv, ir;
  beat_t ib [NS];
  logic ov, orr;
  beat_t ob;
  int checks = 0, failures = 0;
  beat_t expq [NS][$];
  int pk_got [NS];

  aie_pkt_merge #(.NSRC(NS)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_beat(ib),
    .out_valid(ov), .out_ready(orr), .out_beat(ob));

  for (genvar s = 0; s < NS; s++) begin : g_src
    initial begin
      iv[s] = 0; ib[s] = '0;
      wait (rst_n);
      for (int p = 0; p < NP; p++) begin
        int len;
        len = $urandom_range(1, 12);
        for (int w = 0; w < len; w++) begin
          beat_t b;
          b = '{data: data_t'($urandom), last: (w == len-1)};
          expq[s].push_back(b);
          @(negedge clk);
          iv[s] = ($urandom_range(3) != 0);
          ib[s] = b;
          #1;
          while (!(iv[s] && ir[s])) begin
            @(negedge clk); iv[s] = 1; #1;
          end
          @(posedge clk);
          @(negedge clk) iv[s] = 0;
        end
      end
    end
  end

  int cur_src = -1;
  always @(negedge clk) orr <= ($urandom_range(3) != 0);
  always @(posedge clk) begin
    if (ov && orr) begin
      checks++;
      if (cur_src < 0) begin
        if (ob.data >= NS || ob.last) begin failures++; $display("bad header %h", ob); end
        else cur_src = int'(ob.data);
      end else begin
        if (expq[cur_src].size() == 0 || expq[cur_src][0] !== ob) begin
          failures++;
          if (failures < 5) $display("source %0d wrong beat %h", cur_src, ob);
        end else void'(expq[cur_src].pop_front());
        if (ob.last) begin pk_got[cur_src]++; cur_src = -1; end
      end
    end
  end

  initial begin
    orr = 0;
    for (int s = 0; s < NS; s++) pk_got[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (6000) @(posedge clk);
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (pk_got[s] != NP) begin failures++; $display("source %0d: %0d packets", s, pk_got[s]); end
    end
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
