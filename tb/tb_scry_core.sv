// tb_scry_core: end-to-end test of the Scry core at its default size.
//
// Programs are assembled with scry_asm_pkg into a behavioural instruction
// memory (synchronous 16-bit read); a behavioural data memory serves ld/st.
// Arguments are injected into the first instruction's slot, the core is
// started at address 0 and runs until it halts; return values are the
// operands waiting in the slot at the return trigger (res_ops).
//
//   * isxdigit, transcribed from the ISA's example listing, for all 256
//     byte values, against C's isxdigit;
//   * strcpy, transcribed from the ISA's example listing, on random
//     strings, against a byte-by-byte copy;
//   * short programs, each for one mechanism: const/grow, the six two-output
//     ALU variants, implicit immediates, division by zero and isnar, echo.l
//     beyond the 32-instruction reach, dup with a third copy, split echo
//     passing extra operands on, the fifth operand being dropped, pick,
//     pick.i, cast, fence, load/store round trip, a NaR store trap, and the
//     trap/unsupported/illegal halts;
//   * 300 random straight-line programs (const, echo, echo.l, dup, nop,
//     pick, pick.i, add in all six output variants, xor, and, eq), each
//     ending in a return, compared operand by operand with an
//     instruction-level reference model kept in this file.
// The core's event pulses are counted; a mechanism that never happened is a
// failure.
module tb_scry_core;
  import scry_pkg::*;
  import scry_asm_pkg::*;

  logic            clk = 0, rst_n = 0;
  logic            start = 0, inj_valid = 0;
  logic [XLEN-1:0] start_pc = 0;
  operand_t        inj_op = '0;
  logic            running, halted;
  halt_e           halt_cause;
  logic [XLEN-1:0] pc_out, imem_addr;
  operand_t        res_ops [MAX_OPS];
  logic [2:0]      res_count;
  events_t         ev;
  logic [15:0]     imem_rdata;
  logic            dmem_req, dmem_we, dmem_rvalid, dmem_err;
  logic [XLEN-1:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic [1:0]      dmem_size;
  int              checks = 0, failures = 0, cycles = 0;

  scry_core dut (.*);
  scry_mem_model #(.SIZE(4096), .LATENCY(2)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // ---------------- instruction memory ----------------
  logic [15:0] prog [1024];
  always @(posedge clk) imem_rdata <= prog[imem_addr[10:1]];

  // ---------------- event counters ----------------
  int n_retire, n_drop, n_imp, n_two, n_nar, n_jt, n_js, n_long, n_next, n_pick, n_ld, n_st;
  initial begin
    n_retire = 0; n_drop = 0; n_imp = 0; n_two = 0; n_nar = 0; n_jt = 0;
    n_js = 0; n_long = 0; n_next = 0; n_pick = 0; n_ld = 0; n_st = 0;
  end
  always @(posedge clk) begin
    n_retire += int'(ev.retire);   n_drop += int'(ev.opnd_drop);
    n_imp    += int'(ev.implicit_imm); n_two += int'(ev.two_output);
    n_nar    += int'(ev.nar_made); n_jt   += int'(ev.jmp_taken);
    n_js     += int'(ev.jmp_skip); n_long += int'(ev.long_echo);
    n_next   += int'(ev.pass_next); n_pick += int'(ev.pick);
    n_ld     += int'(ev.load);     n_st   += int'(ev.store);
  end

  // ---------------- helpers ----------------
  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL %s: cause=%s count=%0d r0=%h/%h/%b r1=%h r2=%h", what,
        halt_cause.name(), res_count, res_ops[0].tag, res_ops[0].value, res_ops[0].nar,
        res_ops[1].value, res_ops[2].value);
    end
  endtask

  function automatic operand_t opnd(type_t t, logic [63:0] v);
    operand_t o; o.nar = 0; o.tag = t; o.value = canon(t, v); return o;
  endfunction

  typedef logic [15:0] words_t [$];

  // Reset the core, load a program, inject arguments, run to a halt.
  task automatic run(words_t p, operand_t args [$], input int max_cycles = 20000);
    int c0;
    rst_n = 0;
    for (int i = 0; i < 1024; i++) prog[i] = a_trap();
    foreach (p[i]) prog[i] = p[i];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (args[i]) begin
      inj_valid = 1; inj_op = args[i];
      @(negedge clk);
    end
    inj_valid = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    c0 = cycles;
    while (!halted && cycles - c0 < max_cycles) @(negedge clk);
    @(negedge clk);  // res_ops is a registered read of the halted slot
    chk("halted in time", halted);
  endtask

  function automatic logic is_xdigit(int c);
    return (c >= "0" && c <= "9") || (c >= "a" && c <= "f") || (c >= "A" && c <= "F");
  endfunction

  localparam logic [2:0] TU8 = 3'b000, TI8 = 3'b001, TU16 = 3'b010;

  // ---------------- reference model for random programs ----------------
  // Instruction-level model of straight-line code: slot i holds the
  // operands sent to the i-th instruction (at most four, arrival order);
  // reference r from instruction i appends to slot i+1+r. The program starts
  // with a ret whose trigger is instruction L, so slot L holds the results.
  // Written from the ISA rules, independent of the core's datapath.
  operand_t mq [65][$];
  int       n_cmp;

  function automatic logic [63:0] tc(logic [3:0] t, logic [63:0] v);
    int w = 8 << t[2:1];
    logic [63:0] sh = v << (64 - w);
    return t[0] ? 64'($signed(sh) >>> (64 - w)) : (sh >> (64 - w));
  endfunction

  function automatic operand_t mop(logic [3:0] t, logic [63:0] v);
    operand_t o; o.nar = 0; o.tag = t; o.value = tc(t, v); return o;
  endfunction

  function automatic operand_t mnar();
    operand_t o = '0; o.nar = 1; return o;
  endfunction

  function automatic void send(int L, int slot, operand_t o);
    if (slot <= L && mq[slot].size() < 4) mq[slot].push_back(o);
  endfunction

  // kinds: 0 add (two outputs), 1 xor, 2 and, 3 eq
  function automatic void m_alu(int kind, operand_t ops [$], output operand_t lo, output operand_t hi);
    logic [3:0]  t;
    logic [63:0] a, b, m;
    logic [64:0] s;
    int          w;
    if (ops.size() == 0 || ops[0].nar || (ops.size() >= 2 && ops[1].nar)) begin
      lo = mnar(); hi = mnar(); return;
    end
    t = ops[0].tag; w = 8 << t[2:1];
    m = (w == 64) ? '1 : ((64'd1 << w) - 1);
    a = ops[0].value;
    b = (ops.size() >= 2) ? ops[1].value : ((kind == 1) ? '1 : (kind == 3) ? 64'd0 : 64'd1);
    b = tc(t, b);
    hi = mnar();
    unique case (kind)
      0: begin s = {1'b0, a & m} + {1'b0, b & m}; lo = mop(t, s[63:0]); hi = mop(t, 64'(s >> w)); end
      1: lo = mop(t, a ^ b);
      2: lo = mop(t, a & b);
      default: lo = mop(T_U8, 64'(a == b));
    endcase
  endfunction

  // Random program: ret, then L-1 data-flow/ALU instructions.
  task automatic rnd_prog(int L, ref words_t p);
    p = '{a_ret(6'(L - 1))};
    for (int i = 1; i < L; i++) begin
      automatic logic [4:0] r  = 5'($urandom % 6);
      automatic logic [4:0] r2 = 5'($urandom % 6);
      automatic logic       s  = 1'($urandom);
      automatic int         kd = (i >= L - 2) ? 11 : int'($urandom % 11);
      unique case (kd)
        0, 1: p.push_back(a_const(3'($urandom), 8'($urandom)));
        2:    p.push_back(a_echol(10'($urandom % 12)));
        3:    p.push_back(a_dup(r, r2, s));
        4:    p.push_back(a_echo(r, r2, s));
        5:    p.push_back(a_nop());
        6:    p.push_back(a_add(3'(1 + $urandom % 6), r));
        7:    p.push_back(a_xor(r));
        8:    p.push_back(s ? a_eq(r) : a_and(r));
        9:    p.push_back(a_picki(r, 2'($urandom)));
        10:   p.push_back(a_pick(r));
        default: p.push_back(a_echol(10'(L - 1 - i)));  // the last two gather results
      endcase
    end
  endtask

  task automatic model_run(words_t p, int L);
    for (int i = 0; i <= L; i++) mq[i] = {};
    for (int i = 1; i < L; i++) begin
      automatic logic [15:0] w = p[i];
      automatic operand_t    ops [$] = mq[i];
      automatic int          n = ops.size();
      automatic int          nx = i + 1;
      automatic int          r = i + 1 + int'(w[14:10]);
      automatic int          r2 = i + 1 + int'(w[9:5]);
      operand_t lo, hi;
      if (w[4:0] == 5'b1_0000) begin                         // const
        send(L, nx, mop({1'b0, w[7:5]}, w[5] ? {{56{w[15]}}, w[15:8]} : {56'd0, w[15:8]}));
      end else if (w[5:0] == 6'b01_0010) begin               // echo.l
        foreach (ops[j]) send(L, i + 1 + int'(w[15:6]), ops[j]);
      end else if (w[4:0] == 5'b1_1001) begin                // dup
        foreach (ops[j]) begin
          send(L, r, ops[j]); send(L, r2, ops[j]);
          if (w[15]) send(L, nx, ops[j]);
        end
      end else if (w[4:0] == 5'b0_1001) begin                // echo
        foreach (ops[j]) begin
          if (j == 0) send(L, r, ops[j]);
          else if (j == 1) send(L, r2, ops[j]);
          else if (w[15]) send(L, nx, ops[j]);
        end
      end else if (w == 16'h4000) begin                      // nop
      end else if (w[3:0] == 4'b0001) begin                  // ALU
        automatic logic [2:0] f = w[6:4], md = w[9:7];
        automatic int kind = (f == 3'd0 && md != 3'd0) ? 0 : (f == 3'd3) ? 1 : (f == 3'd1) ? 2 : 3;
        m_alu(kind, ops, lo, hi);
        if (kind != 0) send(L, r, lo);
        else unique case (md)
          3'd1: begin send(L, r, lo); send(L, r, hi); end
          3'd2: begin send(L, r, hi); send(L, r, lo); end
          3'd3: begin send(L, r, lo); send(L, nx, hi); end
          3'd4: begin send(L, r, hi); send(L, nx, lo); end
          3'd5: send(L, r, lo);
          default: send(L, r, hi);
        endcase
      end else if (w[15] && w[7:0] == 8'h02) begin           // pick.i
        send(L, r, (int'(w[9:8]) < n) ? ops[w[9:8]] : mnar());
      end else begin                                         // pick
        if (n < 3)           send(L, r, mnar());
        else if (ops[0].nar) send(L, r, ops[0]);
        else                 send(L, r, (ops[0].value != 0) ? ops[1] : ops[2]);
      end
    end
  endtask

  initial begin
    words_t p;
    operand_t args [$];
    repeat (3) @(negedge clk);

    // ===== isxdigit (ISA example listing) =====
    p = '{a_dup(5'd2, 5'd6, 1'b0),      //  0       dup =>sub_0, =>without_bit5
          a_ret(6'd11),                 //  1       ret return
          a_const(TU8, 8'd48),          //  2       const u8, 48
          a_sub(V_LOW, 5'd1),           //  3 sub_0: sub Low, =>lt_10
          a_const(TU8, 8'd10),          //  4       const u8, 10
          a_lt(5'd6),                   //  5 lt_10: lt =>dig_or_let
          a_const(TU8, 8'd223),         //  6       const u8, 223
          a_and(5'd1),                  //  7 without_bit5: and =>sub_a
          a_const(TU8, 8'd65),          //  8       const u8, 65
          a_sub(V_LOW, 5'd1),           //  9 sub_a: sub Low, =>lt_6
          a_const(TU8, 8'd6),           // 10       const u8, 6
          a_lt(5'd0),                   // 11 lt_6: lt =>dig_or_let
          a_or(5'd0)};                  // 12 dig_or_let: or =>0
    for (int c = 0; c < 256; c++) begin
      args = '{opnd(T_U8, 64'(c))};
      run(p, args);
      chk("isxdigit halt", halt_cause == HALT_RET);
      chk("isxdigit value", res_count == 3'd1 && !res_ops[0].nar &&
                            res_ops[0].value == 64'(is_xdigit(c)));
    end

    // ===== strcpy (ISA example listing) =====
    p = '{a_echo(5'd4, 5'd0, 1'b0),     //  0       echo =>dup_dst, =>dup_src
          a_dup(5'd0, 5'd5, 1'b0),      //  1 dup_src: dup =>load, =>inc_src
          a_ld(T_U8, 5'd0),             //  2 load: ld u8, =>0
          a_dup(5'd0, 5'd4, 1'b0),      //  3       dup =>lp_cond, =>store
          a_jmp(7'h7C, 6'd4),           //  4 lp_cond: jmp lp_start, lp_end
          a_dup(5'd2, 5'd0, 1'b0),      //  5 dup_dst: dup =>store, =>0
          a_adds(5'd6),                 //  6       add.s =>lp_end=>lp_start=>dup_dst
          a_adds(5'd1),                 //  7 inc_src: add.s =>lp_end=>lp_start=>dup_src
          a_st(),                       //  8 store: st
          a_ret(6'd0)};                 //  9 lp_end: ret return_at
    for (int k = 0; k < 6; k++) begin
      automatic int   len = (k == 0) ? 0 : int'($urandom % 40) + 1;
      automatic int   jt0 = n_jt;
      automatic logic ok  = 1;
      for (int i = 0; i < 64; i++) begin
        u_mem.mem[256 + i] = 8'(($urandom % 94) + 33);
        u_mem.mem[512 + i] = 8'hEE;
      end
      u_mem.mem[256 + len] = 8'h00;
      args = '{opnd(T_U64, 512), opnd(T_U64, 256)};   // dst, src
      run(p, args);
      chk("strcpy halt", halt_cause == HALT_RET);
      for (int i = 0; i <= len; i++) if (u_mem.mem[512 + i] != u_mem.mem[256 + i]) ok = 0;
      chk("strcpy copy", ok && u_mem.mem[512 + len + 1] == 8'hEE);
      chk("strcpy loop count", n_jt - jt0 == len);
    end

    // ===== const/grow =====
    p = '{a_ret(6'd2), a_const(TU16, 8'h12), a_grow(8'h34)};
    args = '{}; run(p, args);
    chk("grow", res_count == 1 && res_ops[0].tag == T_U16 && res_ops[0].value == 64'h1234);

    // ===== ALU output variants: 200 + 100 as u8 -> low 44, high (carry) 1 =====
    p = '{a_ret(6'd4), a_const(TU8, 8'd200), a_echol(10'd1), a_const(TU8, 8'd100), a_add(V_LOW_HIGH, 5'd0)};
    args = '{}; run(p, args);
    chk("variant 1", res_count == 2 && res_ops[0].value == 44 && res_ops[1].value == 1);
    p[4] = a_add(V_HIGH_LOW, 5'd0); run(p, args);
    chk("variant 2", res_count == 2 && res_ops[0].value == 1 && res_ops[1].value == 44);
    p[4] = a_add(V_LOW, 5'd0); run(p, args);
    chk("variant 5", res_count == 1 && res_ops[0].value == 44);
    p[4] = a_add(V_HIGH, 5'd0); run(p, args);
    chk("variant 6", res_count == 1 && res_ops[0].value == 1);
    p = '{a_ret(6'd5), a_const(TU8, 8'd200), a_echol(10'd1), a_const(TU8, 8'd100),
          a_add(V_LOW_NEXT_HIGH, 5'd1), a_echol(10'd0)};
    run(p, args);
    chk("variant 3", res_count == 2 && res_ops[0].value == 44 && res_ops[1].value == 1);
    p[4] = a_add(V_HIGH_NEXT_LOW, 5'd1); run(p, args);
    chk("variant 4", res_count == 2 && res_ops[0].value == 1 && res_ops[1].value == 44);

    // ===== implicit immediate: add.s on one i8 operand increments =====
    p = '{a_ret(6'd2), a_const(TI8, 8'hFB), a_adds(5'd0)};
    run(p, args);
    chk("implicit +1", res_count == 1 && res_ops[0].tag == T_I8 && res_ops[0].value == 64'hFFFF_FFFF_FFFF_FFFC);

    // ===== division by zero gives NaR; isnar detects it =====
    p = '{a_ret(6'd5), a_const(TU8, 8'd7), a_echol(10'd1), a_const(TU8, 8'd0),
          a_div(V_LOW, 5'd0), a_isnar(5'd0)};
    run(p, args);
    chk("div0 isnar", res_count == 1 && !res_ops[0].nar && res_ops[0].value == 1);

    // ===== echo.l reaching 41 instructions ahead =====
    p = '{a_ret(6'd42), a_const(TU8, 8'd42), a_echol(10'd40)};
    for (int i = 3; i <= 42; i++) p.push_back(a_nop());
    run(p, args);
    chk("long echo", res_count == 1 && res_ops[0].value == 42);

    // ===== dup with a third copy to the next instruction =====
    p = '{a_ret(6'd5), a_const(TU8, 8'd9), a_dup(5'd1, 5'd2, 1'b1),
          a_echol(10'd2), a_echol(10'd1), a_echol(10'd0)};
    run(p, args);
    chk("dup s", res_count == 3 && res_ops[0].value == 9 && res_ops[1].value == 9 && res_ops[2].value == 9);

    // ===== split echo with pass-on, pick.i, fifth operand dropped =====
    // args a..e: e is dropped; echo sends a ->5, b ->4, c,d ->3;
    // pick.i 1 at 3 picks d ->5; echo.l at 4 sends b ->5: result a, d, b
    p = '{a_echol(10'd1), a_ret(6'd3), a_echo(5'd2, 5'd1, 1'b1), a_picki(5'd1, 2'd1), a_echol(10'd0)};
    args = '{opnd(T_U8, 1), opnd(T_U8, 2), opnd(T_U8, 3), opnd(T_U8, 4), opnd(T_U8, 5)};
    run(p, args);
    chk("echo/pick.i", res_count == 3 && res_ops[0].value == 1 && res_ops[1].value == 4 && res_ops[2].value == 2);

    // ===== pick (condition, a, b) =====
    p = '{a_echol(10'd1), a_ret(6'd1), a_pick(5'd0)};
    args = '{opnd(T_U8, 0), opnd(T_U16, 11), opnd(T_U16, 22)};
    run(p, args);
    chk("pick false", res_count == 1 && res_ops[0].value == 22);
    args = '{opnd(T_U8, 5), opnd(T_U16, 11), opnd(T_U16, 22)};
    run(p, args);
    chk("pick true", res_count == 1 && res_ops[0].value == 11);

    // ===== cast keeps the bits, changes the tag =====
    p = '{a_echol(10'd1), a_ret(6'd1), a_cast(T_U16, 5'd0)};
    args = '{opnd(T_U8, 64'hF0)};
    run(p, args);
    chk("cast", res_count == 1 && res_ops[0].tag == T_U16 && res_ops[0].value == 64'hF0);

    // ===== store then load back (with a fence between) =====
    p = '{a_echol(10'd1), a_ret(6'd4), a_st(), a_fence(4'hF, 4'hF), a_const(TU8, 8'h40), a_ld(T_U32, 5'd0)};
    args = '{opnd(T_U32, 64'hDEADBEEF), opnd(T_U64, 64'h40)};
    run(p, args);
    chk("st/ld", res_count == 1 && res_ops[0].tag == T_U32 && res_ops[0].value == 64'hDEADBEEF &&
                 u_mem.mem[64] == 8'hEF && u_mem.mem[67] == 8'hDE);

    // ===== NaR reaching a store traps =====
    p = '{a_st()};
    args = '{mk_nar(NAR_DIV_ZERO), opnd(T_U64, 64'h40)};
    run(p, args);
    chk("nar store trap", halt_cause == HALT_NAR_TRAP);

    // ===== halts =====
    args = '{};
    p = '{a_nop(), a_trap()};           run(p, args); chk("trap", halt_cause == HALT_TRAP && pc_out == 2);
    p = '{a_call(6'd0)};                run(p, args); chk("call unsupported", halt_cause == HALT_UNSUPPORTED);
    p = '{a_rsrv(4'd2, 1'b0)};          run(p, args); chk("rsrv unsupported", halt_cause == HALT_UNSUPPORTED);
    p = '{16'h0003};                    run(p, args); chk("illegal", halt_cause == HALT_ILLEGAL);
    p = '{a_alu(3'b110, 3'b000, 5'd0)}; run(p, args); chk("illegal alu", halt_cause == HALT_ILLEGAL);

    // ===== random straight-line programs against the reference model =====
    for (int k = 0; k < 300; k++) begin
      automatic int L = 8 + int'($urandom % 56);
      if (k == 0) n_cmp = 0;
      rnd_prog(L, p);
      model_run(p, L);
      args = '{};
      run(p, args);
      chk("random halt", halt_cause == HALT_RET);
      chk("random count", res_count == 3'(mq[L].size()));
      n_cmp += mq[L].size();
      foreach (mq[L][i])
        chk("random operand", res_ops[i].nar == mq[L][i].nar &&
            (mq[L][i].nar || (res_ops[i].tag == mq[L][i].tag && res_ops[i].value == mq[L][i].value)));
    end

    $display("random programs: %0d result operands compared", n_cmp);
    chk("random results seen", n_cmp > 100);

    // ===== every mechanism happened =====
    $display("events: retire=%0d drop=%0d implicit=%0d two_out=%0d nar=%0d jmp_taken=%0d jmp_skip=%0d long_echo=%0d next=%0d pick=%0d ld=%0d st=%0d",
             n_retire, n_drop, n_imp, n_two, n_nar, n_jt, n_js, n_long, n_next, n_pick, n_ld, n_st);
    chk("ev retire", n_retire > 0);  chk("ev drop", n_drop > 0);
    chk("ev implicit", n_imp > 0);   chk("ev two_out", n_two > 0);
    chk("ev nar", n_nar > 0);        chk("ev jmp_taken", n_jt > 0);
    chk("ev jmp_skip", n_js > 0);    chk("ev long_echo", n_long > 0);
    chk("ev next", n_next > 0);      chk("ev pick", n_pick > 0);
    chk("ev load", n_ld > 0);        chk("ev store", n_st > 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 2_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
