// dir_classifier_tb: self-checking test of the direction-packet classifier.
//
// Sends a random mix of ordinary and direction packets of random length, with
// random back-pressure on both outputs, and checks that each beat arrives,
// unchanged and in order, on the output its packet's first beat selects, and
// that the packet counters agree.
module dir_classifier_tb;
  import casp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid, in_ready, prog_valid, prog_ready, ctl_valid, ctl_ready;
  beat_t in_beat, prog_beat, ctl_beat;
  logic [31:0] dir_pkts, data_pkts;

  dir_classifier dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  beat_t exp_prog [$], exp_ctl [$];
  int n_dir = 0, n_data = 0;
  localparam int NPKT = 200;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure
  always @(negedge clk) begin
    prog_ready <= ($urandom_range(0, 3) != 0);
    ctl_ready  <= ($urandom_range(0, 3) != 0);
  end

  // scoreboards
  always @(posedge clk) if (rst_n) begin
    if (prog_valid && prog_ready) begin
      check("beat on program side expected", exp_prog.size() > 0, 1);
      if (exp_prog.size() > 0) check("program beat", prog_beat === exp_prog.pop_front(), 1);
    end
    if (ctl_valid && ctl_ready) begin
      check("beat on controller side expected", exp_ctl.size() > 0, 1);
      if (exp_ctl.size() > 0) check("controller beat", ctl_beat === exp_ctl.pop_front(), 1);
    end
  end

  initial begin
    in_valid = 0; in_beat = '0; prog_ready = 0; ctl_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NPKT; p++) begin
      automatic bit dir = ($urandom_range(0, 2) == 0);
      automatic int len = $urandom_range(1, 5);
      for (int i = 0; i < len; i++) begin
        beat_t b;
        for (int w = 0; w < BEAT_W / 32; w++) b.data[w*32 +: 32] = $urandom;
        if (i == 0) b.data[BEAT_W-1 -: 16] = dir ? DIR_TAG : 16'h0800;
        else if ($urandom_range(0, 1) == 0) b.data[BEAT_W-1 -: 16] = dir ? 16'h0800 : DIR_TAG;
        b.last = (i == len - 1);
        if (dir) exp_ctl.push_back(b); else exp_prog.push_back(b);
        @(negedge clk);
        in_valid = 1'b1; in_beat = b;
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
      if (dir) n_dir++; else n_data++;
      @(negedge clk); in_valid = 1'b0;
      if ($urandom_range(0, 1) == 0) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    check("all program beats delivered", exp_prog.size(), 0);
    check("all controller beats delivered", exp_ctl.size(), 0);
    check("direction packet count", dir_pkts, n_dir);
    check("data packet count", data_pkts, n_data);
    check("both kinds sent", (n_dir > 0) && (n_data > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
