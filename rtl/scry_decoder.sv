// scry_decoder: combinational decoder for 16-bit Scry instruction words.
//
// The bit layout is the ISA's published encoding. The two low bits select
// the output-pattern group:
//   xx00  "none or next": trap, nop, st, rsrv, free, st.s, call, ret, saddr,
//         grow, ld.s, const, fence, jmp. Within the group the lowest set bit
//         of bits[9:2] picks the instruction (jmp bit 2, fence bit 3, const
//         bit 4, ld.s bit 5, saddr/grow bit 6, st.s/call/ret bit 7 with
//         bits 9:8 = 00/01/11, free bit 8); with bits[8:0] all clear the
//         word is trap (0x0000), nop (0x4000), st (0x8000) or rsrv.
//   xx10  "one reference": pick, pick.i, ld, cast (ref in bits 14:10, bit 15
//         chooses the variant, bit 5 separates ld/cast from pick) and echo.l
//         (bit 4 set, 10-bit ref in bits 15:6).
//   0001  ALU: ref 14:10, mod 9:7, func 6:4.
//   1001  echo (bit 4 = 0) / dup (bit 4 = 1): s 15, ref 14:10, ref2 9:5.
// Bits that the encoding leaves as "subclass" (shaded) or zero are checked
// where a value is printed for them; any other pattern decodes as
// OP_ILLEGAL, as do words ending in 11 (unused by the ISA).
// Design choices: rsrv is every word with bits[8:0] = 0 whose bytes/t
// field (bits 13:9) is non-zero; st.s words with bits 9:8 = 10 are illegal.
//
// Interface: instr in, dec out; purely combinational, no clock.
module scry_decoder
  import scry_pkg::*;
(
  input  logic [15:0] instr,
  output decoded_t    dec
);

  always_comb begin
    dec       = '0;
    dec.op    = OP_ILLEGAL;
    dec.grp   = GRP_NONE_NEXT;
    // shared fields, valid for the instructions that own them
    dec.ref1  = {5'd0, instr[14:10]};
    dec.ref2  = instr[9:5];
    dec.s     = instr[15];
    dec.mod   = instr[9:7];
    dec.func  = alu_func_e'(instr[6:4]);
    dec.typ   = instr[9:6];
    dec.imm8  = instr[15:8];
    dec.imm7  = instr[9:3];
    dec.trig  = instr[15:10];
    dec.idx   = instr[14:10];
    dec.im    = instr[9:8];
    dec.bytes = instr[13:10];
    dec.t     = instr[9];
    dec.siz   = instr[9:8];
    dec.succ  = instr[15:12];
    dec.pred  = instr[11:8];

    if (instr[1:0] == 2'b00) begin
      dec.grp = GRP_NONE_NEXT;
      if (instr[2]) begin
        dec.op = OP_JMP;
      end else if (instr[3]) begin
        dec.op = OP_FENCE;
      end else if (instr[4]) begin
        dec.op  = OP_CONST;
        dec.typ = {1'b0, instr[7:5]};
      end else if (instr[5]) begin
        dec.op = OP_LDS;
      end else if (instr[6]) begin
        dec.op = instr[7] ? OP_GROW : OP_SADDR;
      end else if (instr[7]) begin
        case (instr[9:8])
          2'b00:   dec.op = OP_STS;
          2'b01:   dec.op = OP_CALL;
          2'b11:   dec.op = OP_RET;
          default: dec.op = OP_ILLEGAL;
        endcase
      end else if (instr[8]) begin
        dec.op = OP_FREE;
      end else if (instr[13:9] != 5'd0) begin
        dec.op = OP_RSRV;
      end else begin
        case (instr[15:14])
          2'b00:   dec.op = OP_TRAP;
          2'b01:   dec.op = OP_NOP;
          2'b10:   dec.op = OP_ST;
          default: dec.op = OP_ILLEGAL;
        endcase
      end
    end else if (instr[1:0] == 2'b10) begin
      dec.grp = GRP_ONE_REF;
      if (instr[3:2] != 2'b00) begin
        dec.op = OP_ILLEGAL;
      end else if (instr[4]) begin
        dec.op   = (instr[5] == 1'b0) ? OP_ECHOL : OP_ILLEGAL;
        dec.ref1 = instr[15:6];
      end else if (instr[5]) begin
        dec.op = instr[15] ? OP_CAST : OP_LD;
      end else if (instr[15]) begin
        dec.op = (instr[7:6] == 2'b00) ? OP_PICKI : OP_ILLEGAL;
      end else begin
        dec.op = (instr[9:6] == 4'b0000) ? OP_PICK : OP_ILLEGAL;
      end
    end else if (instr[3:0] == 4'b0001) begin
      dec.grp = GRP_ALU;
      dec.op  = OP_ALU;
    end else if (instr[3:0] == 4'b1001) begin
      dec.grp = GRP_TWO_REF;
      dec.op  = instr[4] ? OP_DUP : OP_ECHO;
    end else begin
      dec.op = OP_ILLEGAL;
    end
  end

endmodule
