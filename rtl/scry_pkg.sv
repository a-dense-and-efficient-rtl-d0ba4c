// scry_pkg: types and constants shared by the Scry processor RTL.
//
// Scry is a 16-bit-instruction ISA without architectural registers. Values
// travel from producer to consumer as "operands" that carry a type tag
// (internal tagging) or are Not-a-Result (NaR). This package defines:
//   * the operand tag encoding (integer signedness and size),
//   * the operand record held in the operand window and passed between units,
//   * the decoded-instruction record produced by scry_decoder,
//   * NaR error codes, halt causes and the core's event pulses.
//
// Following the ISA: tags describe unsigned/signed integers of 1, 2, 4 or 8
// bytes; ld/ld.s/cast carry a 4-bit type field, const a 3-bit one.
// Design choices (the ISA gives no numeric encoding of the type field):
// type[0] = signed, type[2:1] = log2(size in bytes), type[3] = 0 for
// integers (1 is reserved for future floating-point/vector tags and yields a
// NaR when used). Operand values are kept "canonical": sign- or zero-extended
// from their type width to 64 bits.
package scry_pkg;

  localparam int unsigned XLEN      = 64;  // widest integer type (u64/i64)
  localparam int unsigned MAX_OPS   = 4;   // operands an instruction may consume
  localparam int unsigned PTR_BYTES = 8;   // pointer size, implicit mul/div operand

  // ---------------- type tags ----------------
  typedef logic [3:0] type_t;

  localparam type_t T_U8  = 4'b0000;
  localparam type_t T_I8  = 4'b0001;
  localparam type_t T_U16 = 4'b0010;
  localparam type_t T_I16 = 4'b0011;
  localparam type_t T_U32 = 4'b0100;
  localparam type_t T_I32 = 4'b0101;
  localparam type_t T_U64 = 4'b0110;
  localparam type_t T_I64 = 4'b0111;

  function automatic logic type_signed(type_t t);
    return t[0];
  endfunction

  function automatic logic [1:0] type_log2bytes(type_t t);
    return t[2:1];
  endfunction

  function automatic logic type_valid(type_t t);
    return !t[3];
  endfunction

  // Width mask of a type: ones in its W low bits.
  function automatic logic [XLEN-1:0] type_mask(type_t t);
    case (t[2:1])
      2'd0:    return 64'h0000_0000_0000_00FF;
      2'd1:    return 64'h0000_0000_0000_FFFF;
      2'd2:    return 64'h0000_0000_FFFF_FFFF;
      default: return 64'hFFFF_FFFF_FFFF_FFFF;
    endcase
  endfunction

  // Sign- or zero-extend the low W bits of v according to type t.
  function automatic logic [XLEN-1:0] canon(type_t t, logic [XLEN-1:0] v);
    logic [XLEN-1:0] m;
    logic            sb;
    m = type_mask(t);
    case (t[2:1])
      2'd0:    sb = v[7];
      2'd1:    sb = v[15];
      2'd2:    sb = v[31];
      default: sb = v[63];
    endcase
    if (t[0] && sb) return v | ~m;
    return v & m;
  endfunction

  // ---------------- operands ----------------
  typedef struct packed {
    logic            nar;    // Not-a-Result: value holds a nar_code_e
    type_t           tag;
    logic [XLEN-1:0] value;  // canonical value (see canon)
  } operand_t;

  typedef enum logic [7:0] {
    NAR_NONE      = 8'd0,
    NAR_DIV_ZERO  = 8'd1,
    NAR_BAD_TYPE  = 8'd2,
    NAR_MEM_FAULT = 8'd3,
    NAR_NO_OPND   = 8'd4
  } nar_code_e;

  function automatic operand_t mk_nar(nar_code_e c);
    operand_t o;
    o.nar   = 1'b1;
    o.tag   = T_U8;
    o.value = {56'd0, c};
    return o;
  endfunction

  function automatic operand_t mk_int(type_t t, logic [XLEN-1:0] v);
    operand_t o;
    o.nar   = 1'b0;
    o.tag   = t;
    o.value = canon(t, v);
    return o;
  endfunction

  // ---------------- instructions ----------------
  typedef enum logic [4:0] {
    OP_TRAP, OP_NOP, OP_ST, OP_RSRV, OP_FREE, OP_STS, OP_CALL, OP_RET,
    OP_SADDR, OP_GROW, OP_LDS, OP_CONST, OP_FENCE, OP_JMP,
    OP_PICK, OP_PICKI, OP_LD, OP_CAST, OP_ECHOL,
    OP_ALU, OP_ECHO, OP_DUP, OP_ILLEGAL
  } opcode_e;

  // Output-pattern groups, selected by the low bits of the word.
  typedef enum logic [1:0] {
    GRP_NONE_NEXT = 2'd0,  // bits[1:0] = 00
    GRP_ONE_REF   = 2'd1,  // bits[1:0] = 10
    GRP_ALU       = 2'd2,  // bits[3:0] = 0001
    GRP_TWO_REF   = 2'd3   // bits[3:0] = 1001
  } group_e;

  // ALU func field values (Table of ALU encodings).
  typedef enum logic [2:0] {
    F_ADD = 3'b000,  // eq / add.s / add
    F_SUB = 3'b001,  // and / sub.s / sub
    F_CMP = 3'b010,  // lt / gt / shl
    F_LOG = 3'b011,  // or / xor / shr
    F_MUL = 3'b100,  // isnar / - / mul
    F_DIV = 3'b101,  // - / - / div
    F_R6  = 3'b110,
    F_R7  = 3'b111
  } alu_func_e;

  // Resolved ALU operation.
  typedef enum logic [3:0] {
    A_EQ, A_ADDS, A_ADD, A_AND, A_SUBS, A_SUB, A_LT, A_GT, A_SHL,
    A_OR, A_XOR, A_SHR, A_ISNAR, A_MUL, A_DIV, A_BAD
  } alu_op_e;

  typedef struct packed {
    opcode_e         op;
    group_e          grp;
    logic [9:0]      ref1;   // ref (5 bits) or echo.l ref (10 bits)
    logic [4:0]      ref2;
    logic            s;      // echo/dup: also output to next instruction
    logic [2:0]      mod;
    alu_func_e       func;
    type_t           typ;    // ld/ld.s/cast 4 bits, const 3 bits (zero-extended)
    logic [7:0]      imm8;   // const / grow
    logic [6:0]      imm7;   // jmp target offset
    logic [5:0]      trig;   // jmp/call/ret trigger
    logic [4:0]      idx;    // sts/saddr/ld.s stack index
    logic [1:0]      im;     // pick.i operand index
    logic [3:0]      bytes;  // rsrv/free
    logic            t;      // rsrv/free
    logic [1:0]      siz;    // saddr
    logic [3:0]      succ;   // fence
    logic [3:0]      pred;   // fence
  } decoded_t;

  // ---------------- core status ----------------
  typedef enum logic [2:0] {
    HALT_NONE        = 3'd0,
    HALT_RET         = 3'd1,  // function returned (its trigger was reached)
    HALT_TRAP        = 3'd2,  // trap instruction
    HALT_NAR_TRAP    = 3'd3,  // NaR reached a store or control-flow instruction
    HALT_UNSUPPORTED = 3'd4,  // call, rsrv, free, ld.s, st.s, saddr
    HALT_ILLEGAL     = 3'd5   // unused encoding
  } halt_e;

  // One-cycle pulses that report what the core just did.
  typedef struct packed {
    logic retire;        // an instruction finished
    logic opnd_drop;     // an operand arrived at a full slot and was dropped
    logic implicit_imm;  // an ALU op used its implicit immediate
    logic two_output;    // an ALU op produced low and high
    logic nar_made;      // an instruction produced a NaR
    logic jmp_taken;     // a pending jump redirected fetch at its trigger
    logic jmp_skip;      // a jmp found its condition false
    logic long_echo;     // echo.l sent operands beyond the 32-instruction reach
    logic pass_next;     // echo/dup/ALU output to the next instruction
    logic pick;          // pick or pick.i executed
    logic load;
    logic store;
  } events_t;

endpackage
