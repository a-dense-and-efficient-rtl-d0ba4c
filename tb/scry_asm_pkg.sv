// scry_asm_pkg: a tiny Scry assembler for the testbenches.
//
// Each function returns the 16-bit word of one instruction, laid out field
// by field from the ISA's encoding chart (bit 15 on the left). Written
// independently of scry_decoder so the decoder can be checked against it.
// Type codes follow the RTL convention: {0, log2 bytes, signed}.
package scry_asm_pkg;

  function automatic logic [15:0] a_trap();  return 16'h0000; endfunction
  function automatic logic [15:0] a_nop();   return 16'h4000; endfunction
  function automatic logic [15:0] a_st();    return 16'h8000; endfunction
  function automatic logic [15:0] a_rsrv(logic [3:0] bytes, logic t);
    return {2'b00, bytes, t, 9'b0_0000_0000};
  endfunction
  function automatic logic [15:0] a_free(logic [3:0] bytes, logic t);
    return {2'b00, bytes, t, 9'b1_0000_0000};
  endfunction
  function automatic logic [15:0] a_sts(logic [4:0] idx);
    return {1'b0, idx, 10'b00_1000_0000};
  endfunction
  function automatic logic [15:0] a_call(logic [5:0] trig);
    return {trig, 10'b01_1000_0000};
  endfunction
  function automatic logic [15:0] a_ret(logic [5:0] trig);
    return {trig, 10'b11_1000_0000};
  endfunction
  function automatic logic [15:0] a_saddr(logic [4:0] idx, logic [1:0] siz);
    return {1'b0, idx, siz, 8'b0100_0000};
  endfunction
  function automatic logic [15:0] a_grow(logic [7:0] imm);
    return {imm, 8'b1100_0000};
  endfunction
  function automatic logic [15:0] a_lds(logic [4:0] idx, logic [3:0] typ);
    return {1'b0, idx, typ, 6'b10_0000};
  endfunction
  function automatic logic [15:0] a_const(logic [2:0] typ, logic [7:0] imm);
    return {imm, typ, 5'b1_0000};
  endfunction
  function automatic logic [15:0] a_fence(logic [3:0] succ, logic [3:0] pred);
    return {succ, pred, 3'b000, 5'b0_1000};
  endfunction
  function automatic logic [15:0] a_jmp(logic [6:0] imm, logic [5:0] trig);
    return {trig, imm, 3'b100};
  endfunction
  function automatic logic [15:0] a_pick(logic [4:0] r);
    return {1'b0, r, 10'b00_0000_0010};
  endfunction
  function automatic logic [15:0] a_picki(logic [4:0] r, logic [1:0] im);
    return {1'b1, r, im, 8'b0000_0010};
  endfunction
  function automatic logic [15:0] a_ld(logic [3:0] typ, logic [4:0] r);
    return {1'b0, r, typ, 6'b10_0010};
  endfunction
  function automatic logic [15:0] a_cast(logic [3:0] typ, logic [4:0] r);
    return {1'b1, r, typ, 6'b10_0010};
  endfunction
  function automatic logic [15:0] a_echol(logic [9:0] r);
    return {r, 6'b01_0010};
  endfunction
  function automatic logic [15:0] a_alu(logic [2:0] func, logic [2:0] mod, logic [4:0] r);
    return {1'b0, r, mod, func, 4'b0001};
  endfunction
  function automatic logic [15:0] a_echo(logic [4:0] r, logic [4:0] r2, logic s);
    return {s, r, r2, 5'b0_1001};
  endfunction
  function automatic logic [15:0] a_dup(logic [4:0] r, logic [4:0] r2, logic s);
    return {s, r, r2, 5'b1_1001};
  endfunction

  // ALU mnemonics as (func, mod) from the ALU table; two-output ops take
  // the output-variant number 1..6 as mod.
  function automatic logic [15:0] a_eq(logic [4:0] r);   return a_alu(3'b000, 3'b000, r); endfunction
  function automatic logic [15:0] a_adds(logic [4:0] r); return a_alu(3'b000, 3'b111, r); endfunction
  function automatic logic [15:0] a_add(logic [2:0] v, logic [4:0] r); return a_alu(3'b000, v, r); endfunction
  function automatic logic [15:0] a_and(logic [4:0] r);  return a_alu(3'b001, 3'b000, r); endfunction
  function automatic logic [15:0] a_subs(logic [4:0] r); return a_alu(3'b001, 3'b111, r); endfunction
  function automatic logic [15:0] a_sub(logic [2:0] v, logic [4:0] r); return a_alu(3'b001, v, r); endfunction
  function automatic logic [15:0] a_lt(logic [4:0] r);   return a_alu(3'b010, 3'b000, r); endfunction
  function automatic logic [15:0] a_gt(logic [4:0] r);   return a_alu(3'b010, 3'b111, r); endfunction
  function automatic logic [15:0] a_or(logic [4:0] r);   return a_alu(3'b011, 3'b000, r); endfunction
  function automatic logic [15:0] a_xor(logic [4:0] r);  return a_alu(3'b011, 3'b111, r); endfunction
  function automatic logic [15:0] a_isnar(logic [4:0] r); return a_alu(3'b100, 3'b000, r); endfunction
  function automatic logic [15:0] a_mul(logic [2:0] v, logic [4:0] r); return a_alu(3'b100, v, r); endfunction
  function automatic logic [15:0] a_div(logic [2:0] v, logic [4:0] r); return a_alu(3'b101, v, r); endfunction

  localparam logic [2:0] V_LOW_HIGH = 3'd1, V_HIGH_LOW = 3'd2, V_LOW_NEXT_HIGH = 3'd3,
                         V_HIGH_NEXT_LOW = 3'd4, V_LOW = 3'd5, V_HIGH = 3'd6;

endpackage
