// phd_core_tb: end-to-end test of the directable core at its default sizes.
//
// A behavioural host program (host_program_model) answers ordinary packets and
// passes one extension point, extend{L0, L1, L2}, per packet. The testbench
// plays the director on the same input stream and reads replies and answers
// from the single output, which it back-pressures at random. The sequence of steps:
//   1. plain traffic with empty stored procedures (no-op extension point);
//   2. queries, and a placement that must be refused in batch mode;
//   3. asynchronous interruption by a director break, then placement of
//      L0 = "trace start V true 500", L1 = "count writes V true 5000" and
//      L2 = "watch V (V = 777)", then continue;
//   4. 500 traced packets, the 501st overflows the trace and breaks; the
//      director reads all 500 entries back, updates the variable the program
//      answers with, stops and clears the trace and continues;
//   5. a watchpoint hit and continue;
//   6. traffic until the count reaches 5000 and breaks on the next write.
// Every mechanism is counted and must happen at least once.
module phd_core_tb;
  import casp_pkg::*;

  localparam int unsigned NUM_CTR = 32, NUM_HV = 8, NUM_LABELS = 4;
  localparam int XI = 8, XOF = 9, CNT = 10, CNT_OF = 11;
  localparam int TRACE_MAX = 500, COUNT_MAX = 5000;   // the paper's example sizes

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
    .ep_set (4'b0111)
  );

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // mechanism counters
  int m_data = 0, m_dir = 0, m_place = 0, m_refused = 0, m_interrupt = 0;
  int m_trace_of = 0, m_watch = 0, m_count_of = 0, m_release = 0, m_update = 0;
  int m_contention = 0, m_backpressure = 0, m_held_cycles = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ output side
  reply_t rsp_q  [$];
  longint echo_q [$];
  logic   out_in_pkt = 1'b0;
  logic   held_q = 1'b0;       // program was held at a breakpoint last cycle
  always @(negedge clk) net_out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    if (net_out_valid && net_out_ready) begin
      if (!out_in_pkt) begin
        if (net_out_beat.data[BEAT_W-1 -: 16] == DIR_TAG) rsp_q.push_back(reply_t'(net_out_beat.data));
        else echo_q.push_back(longint'(net_out_beat.data[63:0]));
      end
      out_in_pkt <= !net_out_beat.last;
    end
    if (net_out_valid && !net_out_ready) m_backpressure++;
    if (dut.u_merge.in0_valid && dut.u_merge.in1_valid) m_contention++;
    if (ep_req && mode == MODE_INTERACTIVE) m_held_cycles++;
    if (ep_ack && held_q) m_release++;
    held_q <= ep_req && (mode == MODE_INTERACTIVE);
  end

  // ------------------------------------------------------------ input side
  task automatic send_beats(input beat_t b [$]);
    foreach (b[i]) begin
      @(negedge clk);
      net_in_valid = 1'b1; net_in_beat = b[i];
      @(posedge clk); while (!net_in_ready) @(posedge clk);
    end
    @(negedge clk);
    net_in_valid = 1'b0;
  endtask

  task automatic data_pkt(input longint v);
    beat_t b [$];
    beat_t x;
    int len = $urandom_range(1, 3);
    for (int i = 0; i < len; i++) begin
      for (int w = 0; w < BEAT_W / 32; w++) x.data[w*32 +: 32] = $urandom;
      if (i == 0) begin x.data[BEAT_W-1 -: 16] = 16'h0800; x.data[63:0] = v; end
      x.last = (i == len - 1);
      b.push_back(x);
    end
    send_beats(b);
    m_data++;
  endtask

  task automatic wait_echo(output longint v);
    int n = 0;
    while (echo_q.size() == 0 && n < 1000) begin @(posedge clk); n++; end
    check("answer arrives", echo_q.size() > 0, 1);
    v = (echo_q.size() > 0) ? echo_q.pop_front() : -1;
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
    m_dir++;
    while (rsp_q.size() == 0 && n < 1000) begin @(posedge clk); n++; end
    check("reply arrives", rsp_q.size() > 0, 1);
    r = (rsp_q.size() > 0) ? rsp_q.pop_front() : '0;
  endtask

  function automatic instr_t q(input operand_t a);
    return mk(OP_EXPR, E_VAL, 0, imm(0), a, imm(0));
  endfunction
  function automatic instr_t set(input operand_t u, input operand_t a);
    return mk(OP_ASSIGN, E_VAL, 0, u, a, imm(0));
  endfunction
  function automatic instr_t brk();  return mk(OP_BREAK, E_VAL, 0, imm(0), imm(0), imm(0)); endfunction
  function automatic instr_t cont(); return mk(OP_CONT,  E_VAL, 0, imm(0), imm(0), imm(0)); endfunction
  function automatic instr_t inc(input operand_t u); return mk(OP_INC, E_VAL, 0, u, imm(0), imm(0)); endfunction
  function automatic instr_t place(input int l, input int n);
    return mk(OP_PLACE, E_VAL, 8'(n), imm(word_t'(l)), imm(0), imm(0));
  endfunction

  task automatic wait_mode(input mode_e m, input int max_cycles);
    int n = 0;
    while (mode != m && n < max_cycles) begin @(posedge clk); n++; end
  endtask

  // ------------------------------------------------------------ session
  reply_t r;
  longint v;
  int     since_place;

  initial begin
    net_in_valid = 0; net_in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. plain traffic, no-op extension point
    for (int i = 0; i < 3; i++) begin
      data_pkt(100 + i);
      wait_echo(v);
      check("answer with no-op extension point", v, 100 + i);
    end
    check("program variable 0 counts packets", host_vars[0], 3);

    // 2. queries; placement refused in batch mode
    prog.push_back(q(ctr(0))); direct(r);
    check("query packet count", r.value, 3);
    prog.push_back(place(0, 1)); prog.push_back(brk()); direct(r);
    check("placement refused in batch", r.err, 1);
    m_refused += r.err;
    check("mode stays batch", r.mode, MODE_BATCH);

    // 3. interruption, then install the procedures
    prog.push_back(brk()); direct(r);
    check("director break -> interactive", r.mode, MODE_INTERACTIVE);
    data_pkt(200);
    repeat (40) @(posedge clk);
    check("program held at its extension point", ep_req, 1);
    check("no answer while held", echo_q.size(), 0);
    m_interrupt += (ep_req && echo_q.size() == 0);
    // L0: trace V1 into A0, TRACE_MAX entries
    prog.push_back(place(0, 6));
    prog.push_back(mk(OP_IF, E_LT, 3, imm(0), ctr(XI), imm(TRACE_MAX)));
    prog.push_back(set(arr_ctr(0, XI), ctr(1)));
    prog.push_back(inc(ctr(XI)));
    prog.push_back(cont());
    prog.push_back(inc(ctr(XOF)));
    prog.push_back(brk());
    // L1: count writes of V1 up to COUNT_MAX
    prog.push_back(place(1, 5));
    prog.push_back(mk(OP_IF, E_LT, 2, imm(0), ctr(CNT), imm(COUNT_MAX)));
    prog.push_back(inc(ctr(CNT)));
    prog.push_back(cont());
    prog.push_back(inc(ctr(CNT_OF)));
    prog.push_back(brk());
    // L2: watch V1, break when V1 = 777
    prog.push_back(place(2, 3));
    prog.push_back(mk(OP_IF, E_EQ, 1, imm(0), ctr(1), imm(777)));
    prog.push_back(brk());
    prog.push_back(cont());
    direct(r);
    check("placements accepted", r.err, 0);
    check("placement reply is label code", r.value, 3);
    m_place += (r.err == 0);
    prog.push_back(cont()); direct(r);
    check("continue -> batch", r.mode, MODE_BATCH);
    wait_echo(v);
    check("held packet answered after continue", v, 200);
    since_place = 1;

    // 4. fill the trace, overflow it
    for (int i = 1; i < TRACE_MAX; i++) begin
      data_pkt(1000 + i);
      since_place++;
      wait_echo(v);
      if (v != 1000 + i) check("traced answer", v, 1000 + i);
      // now and then a query right behind the packet, to contend at the merge
      if (i % 50 == 0) begin prog.push_back(q(ctr(XI))); direct(r); check("trace index", r.value, i + 1); end
    end
    check("no break before the trace is full", mode, MODE_BATCH);
    data_pkt(5555);
    since_place++;
    wait_mode(MODE_INTERACTIVE, 200);
    check("trace overflow breaks", mode, MODE_INTERACTIVE);
    check("label L0 broke", brk_code, 1);
    m_trace_of += (mode == MODE_INTERACTIVE && brk_code == 1);
    repeat (20) @(posedge clk);
    check("no answer while held", echo_q.size(), 0);
    prog.push_back(q(ctr(XI)));  direct(r); check("trace index = size", r.value, TRACE_MAX);
    prog.push_back(q(ctr(XOF))); direct(r); check("trace full flag", r.value, 1);
    prog.push_back(q(arr_imm(0, 0))); direct(r); check("trace entry 0", r.value, 200);
    for (int i = 1; i < TRACE_MAX; i++) begin
      prog.push_back(q(arr_imm(0, word_t'(i)))); direct(r);
      if (r.value != 1000 + i) check("trace entry", r.value, 1000 + i);
    end
    checks++;
    prog.push_back(brk()); direct(r); check("director learns the label", r.value, 1);
    // update the program's variable, stop and clear the trace, continue
    prog.push_back(set(ctr(1), imm(4242)));
    prog.push_back(place(0, 0));
    prog.push_back(set(ctr(XI), imm(0)));
    prog.push_back(set(ctr(XOF), imm(0)));
    direct(r);
    prog.push_back(cont()); direct(r);
    wait_echo(v);
    check("state update reaches the program", v, 4242);
    m_update += (v == 4242);

    // 5. watchpoint
    data_pkt(777);
    since_place++;
    wait_mode(MODE_INTERACTIVE, 200);
    check("watch breaks", brk_code, 3);
    m_watch += (brk_code == 3);
    prog.push_back(q(ctr(XI))); direct(r); check("trace stopped", r.value, 0);
    prog.push_back(cont()); direct(r);
    wait_echo(v);
    check("watched answer", v, 777);

    // 6. count to COUNT_MAX
    while (since_place < COUNT_MAX) begin
      data_pkt(2000 + since_place);
      since_place++;
      wait_echo(v);
      if (v != 2000 + since_place - 1) check("counted answer", v, 2000 + since_place - 1);
    end
    check("no break at the limit", mode, MODE_BATCH);
    prog.push_back(q(ctr(CNT))); direct(r); check("count reached", r.value, COUNT_MAX);
    data_pkt(9);
    wait_mode(MODE_INTERACTIVE, 200);
    check("count limit breaks", brk_code, 2);
    prog.push_back(q(ctr(CNT_OF))); direct(r); check("count overflow flag", r.value, 1);
    m_count_of += (r.value == 1);
    prog.push_back(cont()); direct(r);
    wait_echo(v);
    check("last answer", v, 9);

    check("packets seen by the program", host_vars[0], 3 + COUNT_MAX + 1);
    check("direction packets counted", dir_pkts, m_dir);
    check("data packets counted", data_pkts, m_data);

    // every mechanism happened
    check("mechanism: ordinary packets", m_data > 0, 1);
    check("mechanism: direction packets", m_dir > 0, 1);
    check("mechanism: placement", m_place, 1);
    check("mechanism: refused placement", m_refused, 1);
    check("mechanism: interruption", m_interrupt, 1);
    check("mechanism: trace overflow break", m_trace_of, 1);
    check("mechanism: watchpoint break", m_watch, 1);
    check("mechanism: count limit break", m_count_of, 1);
    check("mechanism: release by continue", m_release > 0, 1);
    check("mechanism: state update", m_update, 1);
    check("mechanism: merge contention", m_contention > 0, 1);
    check("mechanism: output back-pressure", m_backpressure > 0, 1);
    check("mechanism: held at breakpoint", m_held_cycles > 0, 1);
    $display("mechanisms: data=%0d dir=%0d place=%0d refused=%0d interrupt=%0d trace_of=%0d watch=%0d count_of=%0d release=%0d update=%0d contention=%0d backpressure=%0d held_cycles=%0d",
             m_data, m_dir, m_place, m_refused, m_interrupt, m_trace_of, m_watch, m_count_of,
             m_release, m_update, m_contention, m_backpressure, m_held_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
