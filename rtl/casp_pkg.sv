// casp_pkg: types and constants shared by the directable core.
//
// A CASP machine ("Counters, Arrays and Stored Procedures") is a deliberately
// weak interpreter embedded in a hardware program. It is driven by a remote
// director through direction packets and runs small stored procedures when the
// host program reaches an extension point. This package fixes the machine word,
// the binary encoding of CASP instructions, and the direction-packet and reply
// beat layouts.
//
// What follows the paper: the instruction repertoire (expressions V, -V,
// V1 = V2, V1 < V2 with results 1 / -1; assignment U := E; inc/dec U;
// if-then-else; break; continue; placement @L:{P}), the operand forms
// (numeral, counter X, array element R[I] with I a numeral or a counter) and
// the reply of a label code for continue/break/placement.
// Own choices (the paper gives no encoding): the tree-shaped if-then-else is
// flattened into a forward skip, so programs are straight-line code with
// forward branches only; 64-bit words; 256-bit stream beats; a 16-bit tag in
// the top bits of the first beat marks a direction packet.
package casp_pkg;

  // Machine word: counters, array elements and immediates.
  localparam int unsigned DATA_W = 64;
  // Array-id field of an operand.
  localparam int unsigned ID_W   = 8;
  // Skip / placement-length field of an instruction.
  localparam int unsigned TGT_W  = 8;
  // Width of one packet beat on every stream of the core.
  localparam int unsigned BEAT_W = 256;
  // Tag in beat[BEAT_W-1 -: 16] of a packet's first beat marking a direction
  // packet (requests from the director and replies from the controller).
  localparam logic [15:0] DIR_TAG = 16'hD1EC;

  typedef logic signed [DATA_W-1:0] word_t;

  // One beat of a packet stream. valid/ready travel beside it.
  typedef struct packed {
    logic [BEAT_W-1:0] data;
    logic              last;
  } beat_t;

  typedef enum logic [3:0] {
    OP_EXPR   = 4'd0,  // evaluate E (a, b, eop); result is E
    OP_ASSIGN = 4'd1,  // U := E
    OP_INC    = 4'd2,  // inc U
    OP_DEC    = 4'd3,  // dec U
    OP_IF     = 4'd4,  // if E > 0 run next instr., else skip tgt instructions
    OP_SKIP   = 4'd5,  // skip tgt instructions (end of a then-branch)
    OP_BREAK  = 4'd6,  // end program, enter interactive mode
    OP_CONT   = 4'd7,  // end program, resume host (batch mode)
    OP_PLACE  = 4'd8   // @L:{P}: the next tgt instructions become SP[L], L = u.val
  } opcode_e;

  typedef enum logic [1:0] {
    E_VAL = 2'd0,  // V1
    E_NEG = 2'd1,  // -V1
    E_EQ  = 2'd2,  // V1 = V2  -> 1 / -1
    E_LT  = 2'd3   // V1 < V2  -> 1 / -1 (signed)
  } eop_e;

  typedef enum logic [1:0] {
    K_IMM     = 2'd0,  // numeral N = val
    K_CTR     = 2'd1,  // counter C[val]
    K_ARR_IMM = 2'd2,  // array element A[arr][val]
    K_ARR_CTR = 2'd3   // array element A[arr][C[val]]
  } okind_e;

  typedef struct packed {
    okind_e          kind;
    logic [ID_W-1:0] arr;
    word_t           val;
  } operand_t;

  // 4 + 2 + 8 + 3 * 74 = 236 bits; sits in the low bits of one beat.
  typedef struct packed {
    opcode_e          op;
    eop_e             eop;
    logic [TGT_W-1:0] tgt;
    operand_t         u;   // updatable value (destination), or label of OP_PLACE
    operand_t         a;   // V1
    operand_t         b;   // V2
  } instr_t;

  typedef enum logic {
    MODE_BATCH       = 1'b0,  // host program runs; stored procedures run at extension points
    MODE_INTERACTIVE = 1'b1   // host held; controller serves the director
  } mode_e;

  // Reply beat sent after every direction packet.
  typedef struct packed {
    logic [15:0]  tag;     // DIR_TAG
    logic [5:0]   rsvd0;
    logic         err;     // a placement outside interactive mode, or a bad destination
    mode_e        mode;    // mode after the program
    logic [7:0]   brk;     // code of the label that last broke (0: none)
    logic [159:0] rsvd1;
    word_t        value;   // result N of the program's last instruction
  } reply_t;

  // Label code: label index + 1. Code 0 stands for "no label" (a program
  // sent by the director outside any extension point).
  function automatic logic [7:0] label_code(input int unsigned idx);
    return 8'(idx + 1);
  endfunction

  // Instruction builders, used by the testbenches and available to anyone
  // assembling CASP programs in SystemVerilog.
  function automatic operand_t imm(input word_t n);
    return '{kind: K_IMM, arr: '0, val: n};
  endfunction
  function automatic operand_t ctr(input int unsigned x);
    return '{kind: K_CTR, arr: '0, val: word_t'(x)};
  endfunction
  function automatic operand_t arr_imm(input logic [ID_W-1:0] r, input word_t i);
    return '{kind: K_ARR_IMM, arr: r, val: i};
  endfunction
  function automatic operand_t arr_ctr(input logic [ID_W-1:0] r, input int unsigned x);
    return '{kind: K_ARR_CTR, arr: r, val: word_t'(x)};
  endfunction
  function automatic instr_t mk(input opcode_e op, input eop_e eop,
                                input logic [TGT_W-1:0] tgt,
                                input operand_t u, input operand_t a,
                                input operand_t b);
    return '{op: op, eop: eop, tgt: tgt, u: u, a: a, b: b};
  endfunction

endpackage
