// casp_controller_tb: self-checking test of the CASP controller.
//
// Plays the director (hand-assembled direction packets) and a host program
// (extension-point requests and variable writes). Each reply is compared with
// the value the CASP semantics give, worked out here by hand. Covered: queries,
// assignment, inc/dec, negation and the two comparisons, if-then-else in a
// direction packet, placement refused in batch mode, break/continue, placement
// in interactive mode, stored procedures for tracing (buffer fill and
// overflow), counting, watchpoints and conditional breakpoints, an extension
// point with several labels, extend{} with no label, and the cycle counts
// stated in the controller's header.
module casp_controller_tb;
  import casp_pkg::*;

  localparam int unsigned NUM_CTR = 32, NUM_HV = 8, NUM_ARR = 2, ARR_DEPTH = 16;
  localparam int unsigned NUM_LABELS = 4, SP_DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  cmd_valid, cmd_ready, rsp_valid, rsp_ready;
  beat_t cmd_beat, rsp_beat;
  logic  ep_req, ep_ack;
  logic [NUM_LABELS-1:0] ep_labels;
  logic  host_wr_en;
  logic [$clog2(NUM_CTR)-1:0] host_wr_id;
  word_t host_wr_data;
  word_t host_vars [NUM_HV];
  mode_e mode;
  logic [7:0] brk_code;

  casp_controller #(
    .NUM_CTR(NUM_CTR), .NUM_HOST_VARS(NUM_HV), .NUM_ARR(NUM_ARR),
    .ARR_DEPTH(ARR_DEPTH), .NUM_LABELS(NUM_LABELS), .SP_DEPTH(SP_DEPTH)
  ) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ director side
  instr_t prog [$];
  reply_t last_rsp;
  int     rsp_cycles;

  // Send the queued program as one direction packet and wait for the reply.
  task automatic send_prog();
    int n = prog.size();
    int t0;
    beat_t b;
    b = '0;
    b.data[BEAT_W-1 -: 16] = DIR_TAG;
    b.last = (n == 0);
    @(negedge clk);
    t0 = $time / 10;
    cmd_valid = 1'b1; cmd_beat = b;
    @(posedge clk); while (!cmd_ready) @(posedge clk);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      b = '0;
      b.data[$bits(instr_t)-1:0] = prog[i];
      b.last = (i == n - 1);
      cmd_beat = b;
      @(posedge clk); while (!cmd_ready) @(posedge clk);
    end
    @(negedge clk);
    cmd_valid = 1'b0;
    rsp_ready = 1'b1;
    while (!rsp_valid) @(negedge clk);
    rsp_cycles = $time / 10 - t0;
    last_rsp = reply_t'(rsp_beat.data);
    @(posedge clk);
    @(negedge clk);
    rsp_ready = 1'b0;
    prog.delete();
  endtask

  // ------------------------------------------------------------ host side
  int ep_cycles;
  task automatic extension_point(input logic [NUM_LABELS-1:0] lbls, input int max_cycles);
    int n = 0;
    @(negedge clk);
    ep_req = 1'b1; ep_labels = lbls;
    do begin @(negedge clk); n++; end while (!ep_ack && n < max_cycles);
    ep_cycles = n;
    if (ep_ack) ep_req = 1'b0;      // a held host keeps its request up
  endtask

  task automatic host_write(input int id, input longint v);
    @(negedge clk);
    host_wr_en = 1'b1; host_wr_id = 5'(id); host_wr_data = v;
    @(negedge clk);
    host_wr_en = 1'b0;
  endtask

  // handy encodings
  function automatic instr_t q(input operand_t a);   // query: value of a
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

  // counter map used below
  localparam int V = 0;          // a host variable
  localparam int XI = 8, XOF = 9, CNT = 10, CNT_OF = 11, T = 12;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hit_break, pc_then;
  initial begin
    cmd_valid = 0; cmd_beat = '0; rsp_ready = 0; ep_req = 0; ep_labels = '0;
    host_wr_en = 0; host_wr_id = '0; host_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- queries and updates in batch mode
    host_write(V, 41);
    check("host var visible", host_vars[V], 41);
    prog.push_back(q(ctr(V)));
    send_prog();
    check("query X", last_rsp.value, 41);
    check("reply latency, 1 instruction", rsp_cycles, 2);
    check("mode batch", last_rsp.mode, MODE_BATCH);

    prog.push_back(inc(ctr(V)));
    prog.push_back(inc(ctr(V)));
    prog.push_back(mk(OP_DEC, E_VAL, 0, ctr(T), imm(0), imm(0)));
    prog.push_back(set(arr_imm(0, 3), imm(-7)));
    prog.push_back(mk(OP_EXPR, E_NEG, 0, imm(0), arr_imm(0, 3), imm(0)));
    send_prog();
    check("neg of array element", last_rsp.value, 7);
    check("reply latency, 5 instructions", rsp_cycles, 6);
    check("inc twice", host_vars[V], 43);
    prog.push_back(q(ctr(T))); send_prog();
    check("dec", last_rsp.value, -1);
    prog.push_back(mk(OP_EXPR, E_EQ, 0, imm(0), ctr(V), imm(43))); send_prog();
    check("eq true", last_rsp.value, 1);
    prog.push_back(mk(OP_EXPR, E_LT, 0, imm(0), ctr(V), imm(43))); send_prog();
    check("lt false", last_rsp.value, -1);
    prog.push_back(mk(OP_EXPR, E_LT, 0, imm(0), ctr(T), imm(0))); send_prog();
    check("lt signed", last_rsp.value, 1);

    // if V = 43 then T := 100 else T := 200 ; then query T
    prog.push_back(mk(OP_IF, E_EQ, 2, imm(0), ctr(V), imm(43)));
    prog.push_back(set(ctr(T), imm(100)));
    prog.push_back(mk(OP_SKIP, E_VAL, 1, imm(0), imm(0), imm(0)));
    prog.push_back(set(ctr(T), imm(200)));
    prog.push_back(q(ctr(T)));
    send_prog();
    check("if then-branch", last_rsp.value, 100);
    prog.push_back(mk(OP_IF, E_EQ, 2, imm(0), ctr(V), imm(0)));
    prog.push_back(set(ctr(T), imm(100)));
    prog.push_back(mk(OP_SKIP, E_VAL, 1, imm(0), imm(0), imm(0)));
    prog.push_back(set(ctr(T), imm(200)));
    prog.push_back(q(ctr(T)));
    send_prog();
    check("if else-branch", last_rsp.value, 200);

    // array indexed by a counter: A0[C[T2]] with T2 = 5
    prog.push_back(set(ctr(13), imm(5)));
    prog.push_back(set(arr_ctr(1, 13), imm(77)));
    prog.push_back(q(arr_imm(1, 5)));
    send_prog();
    check("array via counter index", last_rsp.value, 77);

    // placement is refused in batch mode
    prog.push_back(place(0, 1));
    prog.push_back(brk());
    send_prog();
    check("placement refused in batch", last_rsp.err, 1);
    check("still batch after refused placement", last_rsp.mode, MODE_BATCH);
    extension_point(4'b0001, 50);
    check("label 0 still empty: ep continues", ep_cycles, 2);

    // extend{} with no label
    extension_point(4'b0000, 50);
    check("extend{} acknowledged", ep_cycles, 1);

    // ---- interruption: director breaks, installs procedures, continues
    prog.push_back(brk()); send_prog();
    check("break -> interactive", last_rsp.mode, MODE_INTERACTIVE);
    check("break value = no label", last_rsp.value, 0);

    // L0: trace V into A0 with buffer size 4 (Fig. "trace X"):
    //   if XI < 4 then A0[XI] := V; inc XI; continue else inc XOF; break
    prog.push_back(place(0, 6));
    prog.push_back(mk(OP_IF, E_LT, 3, imm(0), ctr(XI), imm(4)));
    prog.push_back(set(arr_ctr(0, XI), ctr(V)));
    prog.push_back(inc(ctr(XI)));
    prog.push_back(cont());
    prog.push_back(inc(ctr(XOF)));
    prog.push_back(brk());
    // L1: count writes up to 100: if CNT < 100 then inc CNT; continue else inc CNT_OF; break
    prog.push_back(place(1, 5));
    prog.push_back(mk(OP_IF, E_LT, 2, imm(0), ctr(CNT), imm(100)));
    prog.push_back(inc(ctr(CNT)));
    prog.push_back(cont());
    prog.push_back(inc(ctr(CNT_OF)));
    prog.push_back(brk());
    send_prog();
    check("placement reply = label code of L1", last_rsp.value, 2);
    check("placement ok", last_rsp.err, 0);
    prog.push_back(cont()); send_prog();
    check("continue -> batch", last_rsp.mode, MODE_BATCH);

    // host loop: V := i; extend{L0, L1}
    for (int i = 1; i <= 4; i++) begin
      host_write(V, 10 * i);
      extension_point(4'b0011, 50);
      // L0: IF, assign, inc, cont = 4; L1: IF, inc, cont = 3 -> 7 + 1
      check("ep latency trace+count", ep_cycles, 8);
      check("no break while buffer has room", mode, MODE_BATCH);
    end
    host_write(V, 50);
    extension_point(4'b0011, 20);
    check("host held after trace overflow", ep_req, 1);
    check("interactive after overflow", mode, MODE_INTERACTIVE);
    check("broken label code", brk_code, 1);
    // trace print: read back buffer and counters
    for (int i = 0; i < 4; i++) begin
      prog.push_back(q(arr_imm(0, word_t'(i)))); send_prog();
      check("trace entry", last_rsp.value, 10 * (i + 1));
    end
    prog.push_back(q(ctr(XI))); send_prog();   check("trace index", last_rsp.value, 4);
    prog.push_back(q(ctr(XOF))); send_prog();  check("trace overflow (full)", last_rsp.value, 1);
    prog.push_back(q(ctr(CNT))); send_prog();  check("count of L1 ran after L0 broke", last_rsp.value, 5);
    prog.push_back(brk()); send_prog();        check("director learns broken label", last_rsp.value, 1);
    // trace clear: XI := 0; XOF := 0
    prog.push_back(set(ctr(XI), imm(0)));
    prog.push_back(set(ctr(XOF), imm(0)));
    send_prog();
    // watchpoint on L2: if V = 60 then break else continue
    prog.push_back(place(2, 4));
    prog.push_back(mk(OP_IF, E_EQ, 1, imm(0), ctr(V), imm(60)));
    prog.push_back(brk());
    prog.push_back(cont());
    prog.push_back(cont());
    // unbreak L0 and L1 by placing empty / continue procedures
    prog.push_back(place(0, 0));
    prog.push_back(place(1, 1));
    prog.push_back(cont());
    send_prog();
    check("placement reply = L1", last_rsp.value, 2);
    // continue releases the held host
    hit_break = 0;
    fork
      begin prog.push_back(cont()); send_prog(); end
      begin do @(negedge clk); while (!ep_ack); hit_break = 1; ep_req = 1'b0; end
    join
    check("continue released host", hit_break, 1);
    check("batch after continue", last_rsp.mode, MODE_BATCH);

    host_write(V, 59);
    extension_point(4'b0111, 20);
    check("watch not hit", mode, MODE_BATCH);
    // L0 empty (1) + L1 cont (1) + L2 IF, skip to cont (2) = 4 + 1
    check("ep latency empty+cont+watch", ep_cycles, 5);
    host_write(V, 60);
    extension_point(4'b0100, 20);
    check("watch hit", mode, MODE_INTERACTIVE);
    check("watch label code", brk_code, 3);
    prog.push_back(q(ctr(XI))); send_prog();
    check("trace stopped (unchanged index)", last_rsp.value, 0);
    // state update while stopped, then continue
    prog.push_back(set(ctr(V), imm(1234)));
    prog.push_back(cont());
    prog.push_back(set(ctr(V), imm(999)));     // after continue: discarded
    hit_break = 0;
    fork
      send_prog();
      begin do @(negedge clk); while (!ep_ack); hit_break = 1; ep_req = 1'b0; end
    join
    check("released", hit_break, 1);
    check("update while stopped", host_vars[V], 1234);
    check("program ends at continue", host_vars[V] == 999, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
