// ep_overhead_tb: cost of one extension point in the packet path, for the
// three stored procedures of the one-extension-point evaluation: a no-op, a
// packet counter and a variable trace.
//
// The core runs at its default sizes with the behavioural host program, whose
// main loop has one extension point with one label, L0. For each
// configuration the director (this testbench) places the procedure in L0 and
// then sends single-beat packets one at a time with the output always ready.
// Two durations are measured per packet: ep_req to ep_ack at the extension
// point, and first input beat accepted to first output beat taken through the
// whole core. The controller executes one instruction per cycle, so an
// extension point running n instructions costs n + 1 cycles:
//   no-op (empty procedure, counts as 1)       2 cycles
//   count (if, inc, continue)                  4 cycles
//   trace (if, :=, inc, continue)              5 cycles
// and the packet durations must differ from the no-op case by the same 2 and
// 3 cycles. The counter and trace contents are checked as well.
module ep_overhead_tb;
  import casp_pkg::*;

  localparam int unsigned NUM_CTR = 32, NUM_HV = 8, NUM_LABELS = 4;
  localparam int NPKT = 20;
  localparam int XI = 8, XOF = 9, CNT = 10, CNT_OF = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  net_in_valid, net_in_ready, net_out_valid, net_out_ready;
  beat_t net_in_beat, net_out_beat;
  logic  prog_in_valid, prog_in_ready, prog_out_valid, prog_out_ready;
  beat_t prog_in_beat, prog_out_beat;
  logic  ep_req, ep_ack;
  logic [NUM_LABELS-1:0] ep_labels;
  logic  host_wr_en;
  logic [$clog2(NUM_CTR)-1:0] host_wr_id;
  word_t host_wr_data;
  word_t host_vars [NUM_HV];
  mode_e mode;
  logic [7:0] brk_code;
  logic [31:0] dir_pkts, data_pkts;

  phd_core dut (.*);

  host_program_model #(.NUM_CTR(NUM_CTR), .NUM_HOST_VARS(NUM_HV), .NUM_LABELS(NUM_LABELS))
  host (
    .clk, .rst_n,
    .in_valid (prog_in_valid), .in_ready (prog_in_ready), .in_beat (prog_in_beat),
    .out_valid(prog_out_valid), .out_ready(prog_out_ready), .out_beat(prog_out_beat),
    .ep_req, .ep_labels, .ep_ack, .host_wr_en, .host_wr_id, .host_wr_data, .host_vars,
    .ep_set (4'b0001)
  );

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle counter and measurements
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int ep_t0, ep_len, ep_seen;
  logic ep_req_q = 1'b0;
  always @(posedge clk) begin
    ep_req_q <= ep_req && !ep_ack;
    if (ep_req && !ep_req_q) ep_t0 = cyc;
    if (ep_ack) begin ep_len = cyc - ep_t0; ep_seen++; end   // request cycle counts as 0
  end

  reply_t rsp_q  [$];
  int     echo_t [$];
  logic   out_in_pkt = 1'b0;
  assign net_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && net_out_valid) begin
    if (!out_in_pkt) begin
      if (net_out_beat.data[BEAT_W-1 -: 16] == DIR_TAG) rsp_q.push_back(reply_t'(net_out_beat.data));
      else echo_t.push_back(cyc);
    end
    out_in_pkt <= !net_out_beat.last;
  end

  task automatic send_beats(input beat_t b [$]);
    foreach (b[i]) begin
      @(negedge clk);
      net_in_valid = 1'b1; net_in_beat = b[i];
      @(posedge clk); while (!net_in_ready) @(posedge clk);
    end
    @(negedge clk);
    net_in_valid = 1'b0;
  endtask

  instr_t prog [$];
  task automatic direct(output reply_t r);
    beat_t b [$];
    beat_t x;
    int n = 0;
    x = '0; x.data[BEAT_W-1 -: 16] = DIR_TAG; x.last = (prog.size() == 0);
    b.push_back(x);
    foreach (prog[i]) begin
      x = '0; x.data[$bits(instr_t)-1:0] = prog[i]; x.last = (i == prog.size() - 1);
      b.push_back(x);
    end
    prog.delete();
    send_beats(b);
    while (rsp_q.size() == 0 && n < 1000) begin @(posedge clk); n++; end
    check("reply arrives", rsp_q.size() > 0, 1);
    r = (rsp_q.size() > 0) ? rsp_q.pop_front() : '0;
  endtask

  // One packet; returns the cycles from its beat being accepted to its answer.
  task automatic timed_pkt(input longint v, output int dur, output int epl);
    beat_t b [$];
    beat_t x;
    int t_in, n = 0;
    x.data = '0; x.data[BEAT_W-1 -: 16] = 16'h0800; x.data[63:0] = v; x.last = 1'b1;
    b.push_back(x);
    send_beats(b);
    t_in = cyc - 1;
    while (echo_t.size() == 0 && n < 1000) begin @(posedge clk); n++; end
    check("answer arrives", echo_t.size() > 0, 1);
    dur = (echo_t.size() > 0) ? echo_t.pop_front() - t_in : -1;
    epl = ep_len;
    repeat (3) @(posedge clk);
  endtask

  function automatic instr_t q(input operand_t a);
    return mk(OP_EXPR, E_VAL, 0, imm(0), a, imm(0));
  endfunction
  function automatic instr_t op0(input opcode_e op);
    return mk(op, E_VAL, 0, imm(0), imm(0), imm(0));
  endfunction

  task automatic install(input int cfg);
    reply_t r;
    prog.push_back(op0(OP_BREAK)); direct(r);
    check("interactive for placement", r.mode, MODE_INTERACTIVE);
    case (cfg)
      0: prog.push_back(mk(OP_PLACE, E_VAL, 0, imm(0), imm(0), imm(0)));
      1: begin
        prog.push_back(mk(OP_PLACE, E_VAL, 5, imm(0), imm(0), imm(0)));
        prog.push_back(mk(OP_IF, E_LT, 2, imm(0), ctr(CNT), imm(5000)));
        prog.push_back(mk(OP_INC, E_VAL, 0, ctr(CNT), imm(0), imm(0)));
        prog.push_back(op0(OP_CONT));
        prog.push_back(mk(OP_INC, E_VAL, 0, ctr(CNT_OF), imm(0), imm(0)));
        prog.push_back(op0(OP_BREAK));
      end
      default: begin
        prog.push_back(mk(OP_PLACE, E_VAL, 6, imm(0), imm(0), imm(0)));
        prog.push_back(mk(OP_IF, E_LT, 3, imm(0), ctr(XI), imm(500)));
        prog.push_back(mk(OP_ASSIGN, E_VAL, 0, arr_ctr(0, XI), ctr(1), imm(0)));
        prog.push_back(mk(OP_INC, E_VAL, 0, ctr(XI), imm(0), imm(0)));
        prog.push_back(op0(OP_CONT));
        prog.push_back(mk(OP_INC, E_VAL, 0, ctr(XOF), imm(0), imm(0)));
        prog.push_back(op0(OP_BREAK));
      end
    endcase
    prog.push_back(op0(OP_CONT));
    direct(r);
    check("placement accepted", r.err, 0);
    check("back to batch", r.mode, MODE_BATCH);
  endtask

  localparam string NAME [3] = '{"no-op", "count", "trace"};
  localparam int    EP_EXP [3] = '{2, 4, 5};
  int dur_of [3];

  initial begin
    reply_t r;
    int d, e;
    net_in_valid = 0; net_in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cfg = 0; cfg < 3; cfg++) begin
      install(cfg);
      for (int i = 0; i < NPKT; i++) begin
        timed_pkt(longint'(cfg * 100 + i), d, e);
        check({NAME[cfg], ": extension point cycles"}, e, EP_EXP[cfg]);
        if (i == 0) dur_of[cfg] = d;
        else check({NAME[cfg], ": packet duration constant"}, d, dur_of[cfg]);
      end
      $display("%s: extension point %0d cycles, packet through the core %0d cycles",
               NAME[cfg], e, dur_of[cfg]);
    end
    check("count costs 2 more cycles per packet", dur_of[1] - dur_of[0], 2);
    check("trace costs 3 more cycles per packet", dur_of[2] - dur_of[0], 3);
    prog.push_back(q(ctr(CNT))); direct(r);
    check("count", r.value, NPKT);
    prog.push_back(q(ctr(XI))); direct(r);
    check("trace length", r.value, NPKT);
    for (int i = 0; i < NPKT; i++) begin
      prog.push_back(q(arr_imm(0, word_t'(i)))); direct(r);
      check("trace entry", r.value, 200 + i);
    end
    check("no break", mode, MODE_BATCH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
