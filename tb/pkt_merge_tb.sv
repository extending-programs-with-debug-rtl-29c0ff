// pkt_merge_tb: self-checking test of the packet merge.
//
// Two sources send random packets with random gaps while the output applies
// random back-pressure. Checks: every beat arrives unchanged; the beats of one
// packet arrive together, never interleaved with the other source; each
// source's packets keep their order; and when both sources wait the grant
// alternates.
module pkt_merge_tb;
  import casp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in0_valid, in0_ready, in1_valid, in1_ready, out_valid, out_ready;
  beat_t in0_beat, in1_beat, out_beat;

  pkt_merge dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  localparam int NPKT = 100;
  beat_t exp_q [2][$];
  int    cur_src = -1;          // source of the packet being received
  int    alternations = 0, last_pkt_src = -1, both_waiting_at_start = 0;

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  // receiver: find which source the beat came from by matching the queue heads
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int src;
    src = -1;
    // the source id is carried in bit 0 of every beat
    src = int'(out_beat.data[0]);
    if (cur_src == -1) begin
      if (last_pkt_src != -1 && in0_valid && in1_valid && src == last_pkt_src)
        both_waiting_at_start++;          // fairness violation
      cur_src = src;
    end
    check("no interleaving inside a packet", src, cur_src);
    check("beat expected", exp_q[src].size() > 0, 1);
    if (exp_q[src].size() > 0) check("beat content and order", out_beat === exp_q[src].pop_front(), 1);
    if (out_beat.last) begin
      if (last_pkt_src != -1 && src != last_pkt_src) alternations++;
      last_pkt_src = src;
      cur_src = -1;
    end
  end

  task automatic source(input int s);
    for (int p = 0; p < NPKT; p++) begin
      int len = $urandom_range(1, 4);
      for (int i = 0; i < len; i++) begin
        beat_t b;
        for (int w = 0; w < BEAT_W / 32; w++) b.data[w*32 +: 32] = $urandom;
        b.data[0] = 1'(s);
        b.last = (i == len - 1);
        exp_q[s].push_back(b);
        @(negedge clk);
        if (s == 0) begin in0_valid = 1'b1; in0_beat = b; end
        else        begin in1_valid = 1'b1; in1_beat = b; end
        @(posedge clk);
        while (!((s == 0) ? in0_ready : in1_ready)) @(posedge clk);
      end
      @(negedge clk);
      if (s == 0) in0_valid = 1'b0; else in1_valid = 1'b0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
  endtask

  initial begin
    in0_valid = 0; in1_valid = 0; in0_beat = '0; in1_beat = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fork
      source(0);
      source(1);
    join
    repeat (20) @(posedge clk);
    check("source 0 drained", exp_q[0].size(), 0);
    check("source 1 drained", exp_q[1].size(), 0);
    check("grant alternates when both wait", both_waiting_at_start, 0);
    check("both sources interleaved at packet level", alternations > 10, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
