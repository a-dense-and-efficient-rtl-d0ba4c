// tb_scry_decoder: checks scry_decoder against the ISA's encoding chart.
//
// 1. Every one of the 65536 words is classified by an independent
//    mask/match table written from the chart (fixed bits only) and compared
//    with the decoder's opcode and output group.
// 2. Words built by scry_asm_pkg with random fields are decoded and every
//    field the instruction owns is compared with what was put in.
module tb_scry_decoder;
  import scry_pkg::*;
  import scry_asm_pkg::*;

  logic [15:0] instr;
  decoded_t    dec;
  int          checks = 0, failures = 0;

  scry_decoder dut (.instr, .dec);

  typedef struct {
    opcode_e     op;
    logic [15:0] mask;
    logic [15:0] match;
  } pat_t;

  pat_t pats [20];
  initial begin
    pats[0]  = '{OP_FREE,  16'h01FF, 16'h0100};
    pats[1]  = '{OP_STS,   16'h03FF, 16'h0080};
    pats[2]  = '{OP_CALL,  16'h03FF, 16'h0180};
    pats[3]  = '{OP_RET,   16'h03FF, 16'h0380};
    pats[4]  = '{OP_SADDR, 16'h00FF, 16'h0040};
    pats[5]  = '{OP_GROW,  16'h00FF, 16'h00C0};
    pats[6]  = '{OP_LDS,   16'h003F, 16'h0020};
    pats[7]  = '{OP_CONST, 16'h001F, 16'h0010};
    pats[8]  = '{OP_FENCE, 16'h000F, 16'h0008};
    pats[9]  = '{OP_JMP,   16'h0007, 16'h0004};
    pats[10] = '{OP_PICK,  16'h83FF, 16'h0002};
    pats[11] = '{OP_PICKI, 16'h80FF, 16'h8002};
    pats[12] = '{OP_LD,    16'h803F, 16'h0022};
    pats[13] = '{OP_CAST,  16'h803F, 16'h8022};
    pats[14] = '{OP_ECHOL, 16'h003F, 16'h0012};
    pats[15] = '{OP_ALU,   16'h000F, 16'h0001};
    pats[16] = '{OP_ECHO,  16'h001F, 16'h0009};
    pats[17] = '{OP_DUP,   16'h001F, 16'h0019};
    pats[18] = '{OP_TRAP,  16'hFFFF, 16'h0000};
    pats[19] = '{OP_NOP,   16'hFFFF, 16'h4000};
  end

  function automatic opcode_e model(logic [15:0] w);
    int      hits = 0;
    opcode_e r    = OP_ILLEGAL;
    if (w == 16'h8000) return OP_ST;
    for (int i = 0; i < 20; i++)
      if ((w & pats[i].mask) == pats[i].match) begin hits++; r = pats[i].op; end
    // rsrv: bytes/t field non-zero, all low bits clear
    if ((w & 16'h01FF) == 16'h0000 && w[13:9] != 5'd0) begin hits++; r = OP_RSRV; end
    if (hits > 1) return OP_ILLEGAL;  // overlap: flagged by the check below
    return r;
  endfunction

  function automatic group_e grp_model(logic [15:0] w);
    if (w[1:0] == 2'b00) return GRP_NONE_NEXT;
    if (w[1:0] == 2'b10) return GRP_ONE_REF;
    if (w[3:0] == 4'b0001) return GRP_ALU;
    return GRP_TWO_REF;
  endfunction

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s instr=%h op=%s", what, instr, dec.op.name());
    end
  endtask

  int counts [opcode_e];

  initial begin
    #1;
    // ---- exhaustive classification ----
    for (int w = 0; w < 65536; w++) begin
      opcode_e exp_op;
      instr = 16'(w);
      #1;
      exp_op = model(instr);
      chk("opcode", dec.op == exp_op);
      if (exp_op != OP_ILLEGAL) chk("group", dec.grp == grp_model(instr));
      counts[dec.op] = counts.exists(dec.op) ? counts[dec.op] + 1 : 1;
    end
    // code-point counts implied by the chart's field widths
    chk("alu count",   counts[OP_ALU]   == 4096);
    chk("echo count",  counts[OP_ECHO]  == 2048);
    chk("dup count",   counts[OP_DUP]   == 2048);
    chk("echol count", counts[OP_ECHOL] == 1024);
    chk("ld count",    counts[OP_LD]    == 512);
    chk("pick count",  counts[OP_PICK]  == 32);
    chk("jmp count",   counts[OP_JMP]   == 8192);
    chk("nop count",   counts[OP_NOP]   == 1);

    // ---- fields ----
    for (int k = 0; k < 2000; k++) begin
      automatic logic [9:0] r10 = 10'($urandom);
      automatic logic [4:0] r   = 5'($urandom);
      automatic logic [4:0] r2  = 5'($urandom);
      automatic logic [2:0] f   = 3'($urandom);
      automatic logic [2:0] md  = 3'($urandom);
      automatic logic [3:0] ty  = 4'($urandom);
      automatic logic [7:0] i8  = 8'($urandom);
      automatic logic [6:0] i7  = 7'($urandom);
      automatic logic [5:0] tg  = 6'($urandom);
      automatic logic       s   = 1'($urandom);
      automatic logic [1:0] im  = 2'($urandom);
      unique case (k % 10)
        0: begin instr = a_alu(f, md, r); #1;
             chk("alu", dec.op == OP_ALU && dec.ref1 == {5'd0, r} && dec.func == alu_func_e'(f) && dec.mod == md); end
        1: begin instr = a_echo(r, r2, s); #1;
             chk("echo", dec.op == OP_ECHO && dec.ref1[4:0] == r && dec.ref2 == r2 && dec.s == s); end
        2: begin instr = a_dup(r, r2, s); #1;
             chk("dup", dec.op == OP_DUP && dec.ref1[4:0] == r && dec.ref2 == r2 && dec.s == s); end
        3: begin instr = a_echol(r10); #1;
             chk("echol", dec.op == OP_ECHOL && dec.ref1 == r10); end
        4: begin instr = a_ld(ty, r); #1;
             chk("ld", dec.op == OP_LD && dec.ref1[4:0] == r && dec.typ == ty); end
        5: begin instr = a_cast(ty, r); #1;
             chk("cast", dec.op == OP_CAST && dec.ref1[4:0] == r && dec.typ == ty); end
        6: begin instr = a_const(f, i8); #1;
             chk("const", dec.op == OP_CONST && dec.imm8 == i8 && dec.typ == {1'b0, f}); end
        7: begin instr = a_jmp(i7, tg); #1;
             chk("jmp", dec.op == OP_JMP && dec.imm7 == i7 && dec.trig == tg); end
        8: begin instr = a_picki(r, im); #1;
             chk("picki", dec.op == OP_PICKI && dec.ref1[4:0] == r && dec.im == im); end
        default: begin instr = (k % 2) ? a_ret(tg) : a_grow(i8); #1;
             chk("ret/grow", (k % 2) ? (dec.op == OP_RET && dec.trig == tg) : (dec.op == OP_GROW && dec.imm8 == i8)); end
      endcase
    end
    instr = a_fence(4'h5, 4'hA); #1;
    chk("fence", dec.op == OP_FENCE && dec.succ == 4'h5 && dec.pred == 4'hA);
    instr = a_rsrv(4'd3, 1'b1); #1;
    chk("rsrv", dec.op == OP_RSRV && dec.bytes == 4'd3 && dec.t);
    instr = a_saddr(5'd7, 2'd2); #1;
    chk("saddr", dec.op == OP_SADDR && dec.idx == 5'd7 && dec.siz == 2'd2);
    instr = 16'h0003; #1;
    chk("unused 11", dec.op == OP_ILLEGAL);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
