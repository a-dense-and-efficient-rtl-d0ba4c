// tb_scry_alu: self-checking test of scry_alu.
//
// A reference model computes each result exactly on 128-bit signed
// integers (operands sign- or zero-extended by their tag), then slices the
// low and high W-bit halves; it shares no code with the ALU. Random tests
// cover every operation on every integer type with one and two operands
// (implicit immediates); directed tests cover saturation edges, NaR
// propagation, division by zero, isnar, missing operands, a reserved tag and
// unused encodings. Latency: one cycle, XLEN+2 cycles for div (start, XLEN steps, result register).
module tb_scry_alu;
  import scry_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       start = 0;
  alu_func_e  func;
  logic [2:0] mod;
  operand_t   ops [MAX_OPS];
  logic [2:0] n_ops;
  logic       busy, done, two_out, implicit, illegal;
  operand_t   low, high;
  int         checks = 0, failures = 0, cycles = 0;

  scry_alu dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic logic [63:0] tcanon(logic [3:0] t, logic [63:0] v);
    int w = 8 << t[2:1];
    logic [63:0] sh = v << (64 - w);
    return t[0] ? 64'($signed(sh) >>> (64 - w)) : (sh >> (64 - w));
  endfunction

  function automatic logic signed [127:0] wide(logic [3:0] t, logic [63:0] v);
    logic [63:0] c = tcanon(t, v);
    return t[0] ? {{64{c[63]}}, c} : {64'd0, c};
  endfunction

  // expected (lo, hi) for op index: 0 eq 1 add.s 2 add 3 and 4 sub.s 5 sub
  // 6 lt 7 gt 8 shl 9 or 10 xor 11 shr 12 mul 13 div
  task automatic model(input int op, input logic [3:0] t, input logic [63:0] a, input logic [63:0] b,
                       output logic [63:0] lo, output logic [63:0] hi, output logic [3:0] rt);
    int w = 8 << t[2:1];
    logic signed [127:0] A = wide(t, a), B = wide(t, b), R, MX, MN;
    logic [127:0] UA = A & ((128'd1 << w) - 1), UB = B & ((128'd1 << w) - 1), P;
    MX = t[0] ? ((128'sd1 <<< (w - 1)) - 1) : ((128'sd1 <<< w) - 1);
    MN = t[0] ? -(128'sd1 <<< (w - 1)) : 128'sd0;
    rt = t; lo = 0; hi = 0;
    case (op)
      0: begin rt = 4'd0; lo = 64'(A == B); end
      1: begin R = A + B; R = (R > MX) ? MX : (R < MN) ? MN : R; lo = R[63:0]; end
      2: begin P = UA + UB; lo = P[63:0]; hi = 64'(P >> w); end
      3: lo = 64'(A & B);
      4: begin R = A - B; R = (R > MX) ? MX : (R < MN) ? MN : R; lo = R[63:0]; end
      5: begin P = UA - UB; lo = P[63:0]; hi = 64'(UA < UB); end
      6: begin rt = 4'd0; lo = 64'(A < B); end
      7: begin rt = 4'd0; lo = 64'(A > B); end
      8: begin P = UA << UB[6:0]; lo = P[63:0]; hi = 64'(P >> w); end
      9: lo = 64'(A | B);
      10: lo = 64'(A ^ B);
      11: begin if (t[0]) R = (A <<< w) >>> UB[6:0]; else R = (UA << w) >> UB[6:0]; lo = 64'(R >>> w); hi = R[63:0]; end
      12: begin R = A * B; lo = R[63:0]; hi = 64'(R >>> w); end
      13: begin lo = 64'(A / B); hi = 64'(A % B); end
      default: ;
    endcase
    lo = tcanon(rt, lo);
    hi = tcanon(rt, hi);
  endtask

  const logic [2:0] FUNC_OF [14] = '{3'd0, 3'd0, 3'd0, 3'd1, 3'd1, 3'd1, 3'd2, 3'd2, 3'd2, 3'd3, 3'd3, 3'd3, 3'd4, 3'd5};
  const logic [2:0] MOD_OF  [14] = '{3'd0, 3'd7, 3'd3, 3'd0, 3'd7, 3'd3, 3'd0, 3'd7, 3'd3, 3'd0, 3'd7, 3'd3, 3'd3, 3'd3};

  task automatic run(input logic [2:0] f, input logic [2:0] m, input int n, output int lat);
    func = alu_func_e'(f); mod = m; n_ops = 3'(n);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done && lat < 200) begin @(negedge clk); lat++; end
  endtask

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s: func=%0d mod=%0d n=%0d a=%h/%h b=%h/%h -> lo=%h/%h/%b hi=%h",
        what, func, mod, n_ops, ops[0].tag, ops[0].value, ops[1].tag, ops[1].value,
        low.tag, low.value, low.nar, high.value);
    end
  endtask

  function automatic operand_t opnd(logic [3:0] t, logic [63:0] v);
    operand_t o; o.nar = 0; o.tag = t; o.value = tcanon(t, v); return o;
  endfunction

  initial begin
    int lat;
    logic [63:0] elo, ehi, a, b, imm;
    logic [3:0] t, rt;
    for (int i = 0; i < MAX_OPS; i++) ops[i] = '0;
    func = F_ADD; mod = 0; n_ops = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- random, all ops, all types, one or two operands ----
    for (int k = 0; k < 3000; k++) begin
      automatic int op = k % 14;
      automatic int n  = ((k / 14) % 3 == 0) ? 1 : 2;
      t = {1'b0, 3'($urandom)};
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if ($urandom % 4 == 0) b = 64'($urandom % 5);      // small values, edge cases
      if (op == 8 || op == 11) b = 64'($urandom % (8 << t[2:1]));
      if (op == 13 && tcanon(t, b) == 0) b = 64'd3;
      ops[0] = opnd(t, a);
      ops[1] = opnd(t, b);
      // implicit immediates from the ISA's ALU table
      case (op)
        0, 6, 7: imm = 64'd0;
        9, 10:   imm = '1;
        12, 13:  imm = 64'(PTR_BYTES);
        default: imm = 64'd1;
      endcase
      model(op, t, ops[0].value, (n == 1) ? imm : ops[1].value, elo, ehi, rt);
      run(FUNC_OF[op], MOD_OF[op], n, lat);
      chk("done", done);
      chk("low", !low.nar && low.tag == rt && low.value == elo);
      if (MOD_OF[op] == 3'd3) chk("high", !high.nar && high.value == ehi);
      chk("implicit flag", implicit == (n == 1));
      chk("two_out flag", two_out == (MOD_OF[op] == 3'd3));
      chk("latency", lat == ((op == 13) ? XLEN + 2 : 1));
    end

    // ---- directed ----
    // u8 saturating add 200+100 = 255; i8 sub.s -100-100 = -128
    ops[0] = opnd(T_U8, 200); ops[1] = opnd(T_U8, 100);
    run(3'd0, 3'd7, 2, lat); chk("add.s u8 sat", low.value == 64'd255);
    ops[0] = opnd(T_I8, -64'sd100); ops[1] = opnd(T_I8, 64'd100);
    run(3'd1, 3'd7, 2, lat); chk("sub.s i8 sat", low.value == 64'hFFFF_FFFF_FFFF_FF80);
    // add with carry: u8 200+100 = 44 carry 1
    ops[0] = opnd(T_U8, 200);
    run(3'd0, 3'd1, 2, lat); chk("add carry", low.value == 64'd44 && high.value == 64'd1);
    // second operand converted to the first's type: u8 + u16 0x1FF -> 0xFF
    ops[0] = opnd(T_U8, 1); ops[1] = opnd(T_U16, 16'h01FF);
    run(3'd0, 3'd7, 2, lat); chk("mixed type", low.tag == T_U8 && low.value == 64'd255);
    // division by zero -> NaR on both outputs
    ops[0] = opnd(T_I32, 7); ops[1] = opnd(T_I32, 0);
    run(3'd5, 3'd3, 2, lat); chk("div0 nar", low.nar && high.nar && low.value[7:0] == NAR_DIV_ZERO);
    // NaR propagation through add
    ops[0] = opnd(T_U8, 5); ops[1] = mk_nar(NAR_MEM_FAULT);
    run(3'd0, 3'd7, 2, lat); chk("nar prop", low.nar && low.value[7:0] == NAR_MEM_FAULT);
    // isnar with three operands, NaR in the third
    ops[0] = opnd(T_U8, 5); ops[1] = opnd(T_U8, 6); ops[2] = mk_nar(NAR_DIV_ZERO);
    run(3'd4, 3'd0, 3, lat); chk("isnar 3", !low.nar && low.value == 64'd1 && !implicit);
    run(3'd4, 3'd0, 2, lat); chk("isnar 2", !low.nar && low.value == 64'd0);
    // zero operands
    run(3'd0, 3'd7, 0, lat); chk("no operand", low.nar && low.value[7:0] == NAR_NO_OPND);
    // reserved tag
    ops[0] = '{nar: 1'b0, tag: 4'b1000, value: 64'd1};
    run(3'd0, 3'd7, 1, lat); chk("bad tag", low.nar && low.value[7:0] == NAR_BAD_TYPE);
    // unused encodings
    ops[0] = opnd(T_U8, 1);
    run(3'd6, 3'd0, 1, lat); chk("illegal 110", illegal);
    run(3'd5, 3'd0, 1, lat); chk("illegal div 000", illegal);
    run(3'd0, 3'd7, 1, lat); chk("legal", !illegal);
    // signed division rounding: -7 / 2 = -3 rem -1 (i16)
    ops[0] = opnd(T_I16, -64'sd7); ops[1] = opnd(T_I16, 2);
    run(3'd5, 3'd3, 2, lat);
    chk("idiv", low.value == 64'hFFFF_FFFF_FFFF_FFFD && high.value == 64'hFFFF_FFFF_FFFF_FFFF);
    // mul implicit = pointer size: 5 * 8 = 40
    ops[0] = opnd(T_U32, 5);
    run(3'd4, 3'd3, 1, lat); chk("mul implicit", low.value == 64'd40);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 400_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
