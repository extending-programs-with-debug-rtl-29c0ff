// casp_controller: the CASP machine embedded in a host program.
//
// What it does. The controller is the on-chip agent of a remote director. Its
// memory is split into Counters (the host program's variables plus book-keeping
// registers), Arrays (for example trace buffers) and Stored Procedures, one per
// label. When the host program reaches an extension point extend{L1..Ln} it
// raises ep_req with the set of labels; the controller runs the stored
// procedure of each label in turn, to completion. If all of them end in
// continue the host is released with ep_ack; if any ends in break the
// controller enters interactive mode and holds the host until the director
// sends continue. Direction packets from the director carry CASP programs that
// are run at once: queries (X), updates (U := E, inc, dec), break, continue and,
// in interactive mode only, placements @L:{P} that rewrite a stored procedure.
// Every direction packet is answered with one reply beat holding the result of
// the program's last instruction, the mode and the code of the label that last
// broke. This follows the paper's CASP machine and its link with the host
// program closely.
//
// How it works. One interpreter executes one instruction per clock, taken either
// from the incoming packet beat (director programs execute as they stream in)
// or from the stored-procedure memory (at an extension point). Programs are
// straight-line code with forward skips only: an if whose condition is not > 0
// skips its then-branch (tgt instructions), and a then-branch ends with a skip
// over the else-branch. Nothing can jump backwards, so every program ends within
// its own length, as the paper requires of this weak machine. Counter and array
// reads are combinational, writes happen at the clock edge of the instruction.
//
// Interface. cmd_*: direction packets (first beat is the header, then one
// instruction per beat in the low $bits(instr_t) bits). rsp_*: one-beat reply
// per packet. ep_req/ep_labels must stay stable until ep_ack, a one-cycle pulse.
// host_wr_*: the host program's own writes to its variables, which are counters
// 0 .. NUM_HOST_VARS-1 and are read back on host_vars. A controller write wins
// over a host write to the same counter in the same cycle.
//
// Timing. A director program of k instruction beats is answered in the cycle
// after its last beat is taken (reply valid k + 1 cycles after the header beat
// is first offered, with no stalls). An
// extension point whose labels execute n instructions in all (an empty stored
// procedure counts as one) is acknowledged n + 1 cycles after ep_req is first
// offered (ep_ack is seen in cycle n + 1, counting the request's cycle as 0). Director packets wait while a stored procedure runs, and a pending
// extension point is served before a new direction packet.
//
// Own choices where the paper is silent: break and continue always end the
// program (the paper's prose), a placement outside interactive mode is refused
// and flagged in the reply, out-of-range counter or array references read 0
// and are not written, an if takes its then-branch when its condition is > 0,
// every counter resets to 0 and every stored procedure resets to empty
// (equivalent to continue). Arrays are not reset.
module casp_controller
  import casp_pkg::*;
#(
  parameter int unsigned NUM_CTR       = 32,
  parameter int unsigned NUM_HOST_VARS = 8,
  parameter int unsigned NUM_ARR       = 2,
  parameter int unsigned ARR_DEPTH     = 512,
  parameter int unsigned NUM_LABELS    = 4,
  parameter int unsigned SP_DEPTH      = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // direction packets from the director
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  beat_t                         cmd_beat,
  // replies to the director
  output logic                          rsp_valid,
  input  logic                          rsp_ready,
  output beat_t                         rsp_beat,
  // extension point of the host program
  input  logic                          ep_req,
  input  logic [NUM_LABELS-1:0]         ep_labels,
  output logic                          ep_ack,
  // host program variables (counters 0 .. NUM_HOST_VARS-1)
  input  logic                          host_wr_en,
  input  logic [$clog2(NUM_CTR)-1:0]    host_wr_id,
  input  word_t                         host_wr_data,
  output word_t                         host_vars [NUM_HOST_VARS],
  // status
  output mode_e                         mode,
  output logic [7:0]                    brk_code
);

  localparam int unsigned CTR_W  = $clog2(NUM_CTR);
  localparam int unsigned ARR_W  = (NUM_ARR > 1) ? $clog2(NUM_ARR) : 1;
  localparam int unsigned AIDX_W = $clog2(ARR_DEPTH);
  localparam int unsigned LBL_W  = (NUM_LABELS > 1) ? $clog2(NUM_LABELS) : 1;
  localparam int unsigned SPA_W  = (SP_DEPTH > 1) ? $clog2(SP_DEPTH) : 1;
  localparam int unsigned PC_W   = $clog2(SP_DEPTH + 1);
  localparam int unsigned INS_W  = $bits(instr_t);

  if (NUM_HOST_VARS > NUM_CTR) begin : g_bad_cfg
    $error("NUM_HOST_VARS must not exceed NUM_CTR");
  end

  // ---------------------------------------------------------------- storage
  word_t           ctr_q   [NUM_CTR];
  word_t           arr_mem [NUM_ARR][ARR_DEPTH];
  instr_t          sp_mem  [NUM_LABELS][SP_DEPTH];
  logic [PC_W-1:0] sp_len  [NUM_LABELS];

  // ---------------------------------------------------------------- control
  typedef enum logic [1:0] {S_IDLE, S_CMD, S_REPLY, S_EP} state_e;
  state_e                state;
  logic                  ep_held;     // host stopped at an extension point that broke
  logic                  ep_broke;    // some label of the current extension point broke
  logic [LBL_W-1:0]      cur_lbl;
  logic [NUM_LABELS-1:0] lbl_rem;
  logic [PC_W-1:0]       pc;
  logic [TGT_W-1:0]      skip_cnt;    // instruction beats still to skip
  logic [TGT_W-1:0]      place_cnt;   // instruction beats still to store
  logic [TGT_W-1:0]      place_total;
  logic [PC_W-1:0]       place_idx;
  logic [LBL_W-1:0]      place_lbl;
  logic                  place_ok;
  logic                  prog_done;   // break/continue seen: discard the rest
  logic                  err_q;
  word_t                 last_val;

  // ---------------------------------------------------------------- reads
  function automatic word_t ctr_rd(input word_t x);
    if ($unsigned(x) < 64'(NUM_CTR)) return ctr_q[x[CTR_W-1:0]];
    return '0;
  endfunction

  function automatic word_t arr_index(input operand_t o);
    return (o.kind == K_ARR_IMM) ? o.val : ctr_rd(o.val);
  endfunction

  function automatic logic arr_ok(input operand_t o);
    return (32'(o.arr) < NUM_ARR) && ($unsigned(arr_index(o)) < 64'(ARR_DEPTH));
  endfunction

  function automatic word_t opnd_rd(input operand_t o);
    word_t idx;
    idx = arr_index(o);
    unique case (o.kind)
      K_IMM:   return o.val;
      K_CTR:   return ctr_rd(o.val);
      default: return arr_ok(o) ? arr_mem[o.arr[ARR_W-1:0]][idx[AIDX_W-1:0]] : '0;
    endcase
  endfunction

  // lowest set label of a mask
  function automatic logic [LBL_W-1:0] first_lbl(input logic [NUM_LABELS-1:0] m);
    logic [LBL_W-1:0] r;
    r = '0;
    for (int i = NUM_LABELS - 1; i >= 0; i--)
      if (m[i]) r = LBL_W'(i);
    return r;
  endfunction

  // ---------------------------------------------------------------- decode
  instr_t cmd_ins, sp_ins, ins;
  logic   sp_in_range;
  assign cmd_ins     = instr_t'(cmd_beat.data[INS_W-1:0]);
  assign sp_in_range = (pc < sp_len[cur_lbl]);
  assign sp_ins      = sp_mem[cur_lbl][pc[SPA_W-1:0]];
  assign ins         = (state == S_EP) ? sp_ins : cmd_ins;

  logic ep_start;
  assign ep_start = (state == S_IDLE) && ep_req && !ep_ack && !ep_held &&
                    (mode == MODE_BATCH);

  assign cmd_ready = (state == S_CMD) || ((state == S_IDLE) && !ep_start);

  // an instruction is executed this cycle
  logic do_exec;
  assign do_exec = ((state == S_CMD) && cmd_valid && (place_cnt == '0) &&
                    (skip_cnt == '0) && !prog_done) ||
                   ((state == S_EP) && sp_in_range);

  // ---------------------------------------------------------------- execute
  word_t va, vb, vu, e_val, res;
  logic  cond;
  logic  wr_op;          // the instruction writes U
  logic  ctr_we, arr_we, bad_dst;
  logic [CTR_W-1:0]  ctr_widx;
  logic [ARR_W-1:0]  arr_wsel;
  logic [AIDX_W-1:0] arr_widx;
  word_t             arr_idx_u;

  always_comb begin
    va = opnd_rd(ins.a);
    vb = opnd_rd(ins.b);
    vu = opnd_rd(ins.u);
    unique case (ins.eop)
      E_VAL: e_val = va;
      E_NEG: e_val = -va;
      E_EQ:  e_val = (va == vb) ? word_t'(1) : word_t'(-1);
      E_LT:  e_val = (va <  vb) ? word_t'(1) : word_t'(-1);
    endcase
    cond = (e_val > 0);

    wr_op = 1'b0;
    res   = e_val;
    unique case (ins.op)
      OP_ASSIGN: wr_op = 1'b1;
      OP_INC:    begin wr_op = 1'b1; res = vu + 1; end
      OP_DEC:    begin wr_op = 1'b1; res = vu - 1; end
      default:   ;
    endcase

    arr_idx_u = arr_index(ins.u);
    ctr_widx  = ins.u.val[CTR_W-1:0];
    arr_wsel  = ins.u.arr[ARR_W-1:0];
    arr_widx  = arr_idx_u[AIDX_W-1:0];
    ctr_we    = 1'b0;
    arr_we    = 1'b0;
    bad_dst   = 1'b0;
    if (do_exec && wr_op) begin
      unique case (ins.u.kind)
        K_IMM:   bad_dst = 1'b1;
        K_CTR:   if ($unsigned(ins.u.val) < 64'(NUM_CTR)) ctr_we = 1'b1; else bad_dst = 1'b1;
        default: if (arr_ok(ins.u)) arr_we = 1'b1; else bad_dst = 1'b1;
      endcase
    end
  end

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CTR; i++) ctr_q[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_CTR; i++) begin
        if (ctr_we && (ctr_widx == CTR_W'(i)))
          ctr_q[i] <= res;
        else if (host_wr_en && (i < NUM_HOST_VARS) && (host_wr_id == CTR_W'(i)))
          ctr_q[i] <= host_wr_data;
      end
    end
  end

  for (genvar g = 0; g < NUM_HOST_VARS; g++) begin : g_hv
    assign host_vars[g] = ctr_q[g];
  end

  // ---------------------------------------------------------------- arrays
  always_ff @(posedge clk) begin
    if (arr_we) arr_mem[arr_wsel][arr_widx] <= res;
  end

  // ---------------------------------------------------------------- stored procedures
  logic sp_we;
  assign sp_we = (state == S_CMD) && cmd_valid && (place_cnt != '0) && place_ok &&
                 (32'(place_idx) < SP_DEPTH);

  always_ff @(posedge clk) begin
    if (sp_we) sp_mem[place_lbl][place_idx[SPA_W-1:0]] <= cmd_ins;
  end

  // ---------------------------------------------------------------- sequencing
  logic [NUM_LABELS-1:0] rem_after;
  logic                  sp_end;
  logic                  place_legal;
  int unsigned           pc_skip;
  always_comb begin
    rem_after   = lbl_rem & ~(NUM_LABELS'(1) << cur_lbl);
    sp_end      = !sp_in_range || (sp_ins.op == OP_BREAK) || (sp_ins.op == OP_CONT);
    place_legal = (mode == MODE_INTERACTIVE) && ($unsigned(cmd_ins.u.val) < 64'(NUM_LABELS));
    pc_skip     = 32'(pc) + 1 + 32'(ins.tgt);
    if (pc_skip > SP_DEPTH) pc_skip = SP_DEPTH;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      mode        <= MODE_BATCH;
      brk_code    <= '0;
      ep_held     <= 1'b0;
      ep_broke    <= 1'b0;
      ep_ack      <= 1'b0;
      cur_lbl     <= '0;
      lbl_rem     <= '0;
      pc          <= '0;
      skip_cnt    <= '0;
      place_cnt   <= '0;
      place_total <= '0;
      place_idx   <= '0;
      place_lbl   <= '0;
      place_ok    <= 1'b0;
      prog_done   <= 1'b0;
      err_q       <= 1'b0;
      last_val    <= '0;
      for (int i = 0; i < NUM_LABELS; i++) sp_len[i] <= '0;
    end else begin
      ep_ack <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (ep_start) begin
            if (ep_labels == '0) begin
              ep_ack <= 1'b1;                 // extend{} has no effect
            end else begin
              lbl_rem  <= ep_labels;
              cur_lbl  <= first_lbl(ep_labels);
              pc       <= '0;
              ep_broke <= 1'b0;
              state    <= S_EP;
            end
          end else if (cmd_valid) begin       // header beat of a direction packet
            skip_cnt  <= '0;
            place_cnt <= '0;
            prog_done <= 1'b0;
            err_q     <= 1'b0;
            last_val  <= '0;
            state     <= cmd_beat.last ? S_REPLY : S_CMD;
          end
        end

        S_CMD: if (cmd_valid) begin
          if (place_cnt != '0) begin
            place_cnt <= place_cnt - 1'b1;
            place_idx <= place_idx + 1'b1;
            if (place_cnt == TGT_W'(1) && place_ok)
              sp_len[place_lbl] <= (32'(place_total) > SP_DEPTH) ? PC_W'(SP_DEPTH)
                                                                : PC_W'(place_total);
          end else if (skip_cnt != '0) begin
            skip_cnt <= skip_cnt - 1'b1;
          end else if (!prog_done) begin
            if (bad_dst) err_q <= 1'b1;
            unique case (cmd_ins.op)
              OP_IF: begin
                last_val <= e_val;
                if (!cond) skip_cnt <= cmd_ins.tgt;
              end
              OP_SKIP:  skip_cnt <= cmd_ins.tgt;
              OP_BREAK: begin
                mode      <= MODE_INTERACTIVE;
                last_val  <= word_t'(brk_code);
                prog_done <= 1'b1;
              end
              OP_CONT: begin
                mode      <= MODE_BATCH;
                last_val  <= word_t'(brk_code);
                prog_done <= 1'b1;
                if (ep_held) begin
                  ep_held <= 1'b0;
                  ep_ack  <= 1'b1;
                end
              end
              OP_PLACE: begin
                place_ok    <= place_legal;
                place_lbl   <= cmd_ins.u.val[LBL_W-1:0];
                place_cnt   <= cmd_ins.tgt;
                place_total <= cmd_ins.tgt;
                place_idx   <= '0;
                last_val    <= word_t'(label_code(32'(cmd_ins.u.val[7:0])));
                if (!place_legal)
                  err_q <= 1'b1;
                else if (cmd_ins.tgt == '0)
                  sp_len[cmd_ins.u.val[LBL_W-1:0]] <= '0;
              end
              default: last_val <= res;        // EXPR, ASSIGN, INC, DEC
            endcase
          end
          if (cmd_beat.last) state <= S_REPLY;
        end

        S_REPLY: if (rsp_ready) state <= S_IDLE;

        S_EP: begin
          if (sp_in_range) begin
            unique case (sp_ins.op)
              OP_IF:    pc <= cond ? pc + 1'b1 : PC_W'(pc_skip);
              OP_SKIP,
              OP_PLACE: pc <= PC_W'(pc_skip);   // no placement from a stored procedure
              default:  pc <= pc + 1'b1;
            endcase
            if (sp_ins.op == OP_BREAK) begin
              ep_broke <= 1'b1;
              brk_code <= label_code(32'(cur_lbl));
            end
          end
          if (sp_end) begin
            if (rem_after != '0) begin
              lbl_rem <= rem_after;
              cur_lbl <= first_lbl(rem_after);
              pc      <= '0;
            end else begin
              state <= S_IDLE;
              if (ep_broke || (sp_in_range && sp_ins.op == OP_BREAK)) begin
                mode    <= MODE_INTERACTIVE;
                ep_held <= 1'b1;
              end else begin
                ep_ack  <= 1'b1;
              end
            end
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- reply
  reply_t rsp;
  always_comb begin
    rsp       = '0;
    rsp.tag   = DIR_TAG;
    rsp.err   = err_q;
    rsp.mode  = mode;
    rsp.brk   = brk_code;
    rsp.value = last_val;
  end
  assign rsp_valid     = (state == S_REPLY);
  assign rsp_beat.data = rsp;
  assign rsp_beat.last = 1'b1;

  // ---------------------------------------------------------------- rules
  // The host keeps its extension-point request stable until it is acknowledged
  // (it may drop it in the cycle the acknowledgement is seen).
  a_ep_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ep_req && !ep_ack |=> ep_ack || (ep_req && $stable(ep_labels)));
  // The host is never released while the controller is interactive.
  a_no_ack_interactive: assert property (@(posedge clk) disable iff (!rst_n)
    ep_ack |-> mode == MODE_BATCH);

endmodule
