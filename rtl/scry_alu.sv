// scry_alu: type-polymorphic integer ALU of the Scry ISA.
//
// One encoding per operation serves every integer type: the first operand's
// tag selects width (8/16/32/64) and signedness. The op comes from the
// instruction's func and mod fields as in the ISA's ALU table:
//   func 000: eq (mod 000)    add.s (mod 111)  add (other mod)
//   func 001: and             sub.s            sub
//   func 010: lt              gt               shl
//   func 011: or              xor              shr
//   func 100: isnar           -                mul
//   func 101: -               -                div      (110, 111 unused)
// mod 000/111 give one output (low). Other mod values mark a two-output op:
// low = sum/difference/product low half/quotient/shifted value, high =
// carry/borrow/product high half/remainder/bits shifted out. Routing of the
// two outputs (the six output variants) is done by the core.
// Operand-count polymorphism: with one operand the second is the op's
// implicit immediate, of the first operand's type: 0 for eq/lt/gt, 1 for
// add/sub/and/shl/shr, all ones for or/xor, the pointer size (PTR_BYTES)
// for mul/div. isnar checks every operand it is given. Any NaR input makes
// the outputs NaR (except isnar); division by zero makes them NaR.
//
// Design choices where the ISA is silent: the second operand is converted to
// the first's type; comparison and isnar results are u8 0/1; carry/borrow
// high outputs are 0/1 of the first operand's type; shl's high output is
// the bits shifted out at the top, shr's high output is the bits shifted out
// at the bottom, left-aligned; signed division truncates toward zero and
// MIN/-1 wraps; an operand beyond the second is ignored (except by isnar);
// zero operands give a NaR. Unused func/mod combinations assert 'illegal'.
//
// Timing: 'start' with the inputs valid; 'done' pulses one cycle later with
// low/high registered, or XLEN+2 cycles later for div (iterative divider).
module scry_alu
  import scry_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  alu_func_e       func,
  input  logic [2:0]      mod,
  input  operand_t        ops [MAX_OPS],
  input  logic [2:0]      n_ops,
  output logic            busy,
  output logic            done,
  output operand_t        low,
  output operand_t        high,
  output logic            two_out,   // op produces a high output
  output logic            implicit,  // implicit immediate was used
  output logic            illegal    // unused encoding
);

  // ---------------- op resolution ----------------
  alu_op_e op;
  logic    single;
  always_comb begin
    single = (mod == 3'b000) || (mod == 3'b111);
    unique case (func)
      F_ADD:   op = (mod == 3'b000) ? A_EQ    : (mod == 3'b111) ? A_ADDS : A_ADD;
      F_SUB:   op = (mod == 3'b000) ? A_AND   : (mod == 3'b111) ? A_SUBS : A_SUB;
      F_CMP:   op = (mod == 3'b000) ? A_LT    : (mod == 3'b111) ? A_GT   : A_SHL;
      F_LOG:   op = (mod == 3'b000) ? A_OR    : (mod == 3'b111) ? A_XOR  : A_SHR;
      F_MUL:   op = (mod == 3'b000) ? A_ISNAR : (mod == 3'b111) ? A_BAD  : A_MUL;
      F_DIV:   op = single ? A_BAD : A_DIV;
      default: op = A_BAD;
    endcase
  end

  // ---------------- operand preparation ----------------
  type_t           t;
  logic [XLEN-1:0] m, ua, ub, sa, sb, imm;
  logic [6:0]      w;          // type width in bits
  logic            sgn, use_imm, any_nar, bad_type;
  operand_t        nar_src;

  always_comb begin
    t       = ops[0].tag;
    m       = type_mask(t);
    sgn     = type_signed(t);
    w       = 7'd8 << type_log2bytes(t);
    use_imm = (n_ops == 3'd1);
    unique case (op)
      A_EQ, A_LT, A_GT: imm = '0;
      A_OR, A_XOR:      imm = '1;
      A_MUL, A_DIV:     imm = XLEN'(PTR_BYTES);
      default:          imm = 64'd1;
    endcase
    sa  = ops[0].value;
    sb  = canon(t, use_imm ? imm : ops[1].value);
    ua  = sa & m;
    ub  = sb & m;
    any_nar  = ops[0].nar || (!use_imm && ops[1].nar);
    nar_src  = ops[0].nar ? ops[0] : ops[1];
    bad_type = !type_valid(ops[0].tag) || (!use_imm && !type_valid(ops[1].tag));
  end

  // ---------------- combinational results ----------------
  logic [XLEN:0]        usum, udif;
  logic signed [XLEN+1:0] ssum, sdif, smax, smin;
  logic [2*XLEN-1:0]    shl_v, shr_v, prod;
  logic [7:0]           amt;
  logic [XLEN-1:0]      r_lo, r_hi;
  type_t                r_t;
  logic                 isnar_v;

  always_comb begin
    usum = {1'b0, ua} + {1'b0, ub};
    udif = {1'b0, ua} - {1'b0, ub};
    ssum = $signed({{2{sa[XLEN-1]}}, sa}) + $signed({{2{sb[XLEN-1]}}, sb});
    sdif = $signed({{2{sa[XLEN-1]}}, sa}) - $signed({{2{sb[XLEN-1]}}, sb});
    smax = $signed({2'b00, m >> 1});
    smin = ~smax;
    amt  = (ub > 64'd128) ? 8'd128 : ub[7:0];
    shl_v = {{XLEN{1'b0}}, ua} << amt;
    if (sgn) shr_v = $signed({sa, {XLEN{1'b0}}}) >>> amt;
    else     shr_v = {sa, {XLEN{1'b0}}} >> amt;
    if (sgn) prod = $signed({{XLEN{sa[XLEN-1]}}, sa}) * $signed({{XLEN{sb[XLEN-1]}}, sb});
    else     prod = {{XLEN{1'b0}}, ua} * {{XLEN{1'b0}}, ub};

    isnar_v = 1'b0;
    for (int i = 0; i < MAX_OPS; i++)
      if (3'(i) < n_ops && ops[i].nar) isnar_v = 1'b1;

    r_t  = t;
    r_lo = '0;
    r_hi = '0;
    unique case (op)
      A_EQ:  begin r_t = T_U8; r_lo = {63'd0, ua == ub}; end
      A_LT:  begin r_t = T_U8; r_lo = {63'd0, sgn ? ($signed(sa) < $signed(sb)) : (ua < ub)}; end
      A_GT:  begin r_t = T_U8; r_lo = {63'd0, sgn ? ($signed(sa) > $signed(sb)) : (ua > ub)}; end
      A_ISNAR: begin r_t = T_U8; r_lo = {63'd0, isnar_v}; end
      A_ADD: begin r_lo = usum[XLEN-1:0]; r_hi = {63'd0, usum[w]}; end
      A_SUB: begin r_lo = udif[XLEN-1:0]; r_hi = {63'd0, ua < ub}; end
      A_ADDS: begin
        if (sgn) r_lo = (ssum > smax) ? smax[XLEN-1:0] : (ssum < smin) ? smin[XLEN-1:0] : ssum[XLEN-1:0];
        else     r_lo = (usum > {1'b0, m}) ? m : usum[XLEN-1:0];
      end
      A_SUBS: begin
        if (sgn) r_lo = (sdif > smax) ? smax[XLEN-1:0] : (sdif < smin) ? smin[XLEN-1:0] : sdif[XLEN-1:0];
        else     r_lo = (ua < ub) ? '0 : udif[XLEN-1:0];
      end
      A_AND: r_lo = ua & ub;
      A_OR:  r_lo = ua | ub;
      A_XOR: r_lo = ua ^ ub;
      A_SHL: begin r_lo = shl_v[XLEN-1:0]; r_hi = XLEN'(shl_v >> w); end
      A_SHR: begin r_lo = shr_v[2*XLEN-1:XLEN]; r_hi = shr_v[XLEN-1:0] >> (7'd64 - w); end
      A_MUL: begin r_lo = prod[XLEN-1:0]; r_hi = XLEN'(prod >> w); end
      default: ;
    endcase
  end

  // ---------------- division ----------------
  logic            div_start, div_busy, div_done, div_neg_q, div_neg_r;
  logic [XLEN-1:0] div_q, div_r, mag_a, mag_b;
  logic            pend_div;

  assign mag_a = (sgn && sa[XLEN-1]) ? -sa : sa;
  assign mag_b = (sgn && sb[XLEN-1]) ? -sb : sb;

  scry_divider u_div (
    .clk, .rst_n,
    .start    (div_start),
    .dividend (mag_a),
    .divisor  (mag_b),
    .busy     (div_busy),
    .done     (div_done),
    .quotient (div_q),
    .remainder(div_r)
  );

  logic div_zero;
  assign div_zero  = (ub == '0);
  assign div_start = start && (op == A_DIV) && !any_nar && !bad_type && (n_ops != 3'd0) && !div_zero;

  // ---------------- output registers ----------------
  type_t div_t;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done      <= 1'b0;
      pend_div  <= 1'b0;
      low       <= '0;
      high      <= '0;
      two_out   <= 1'b0;
      implicit  <= 1'b0;
      illegal   <= 1'b0;
      div_neg_q <= 1'b0;
      div_neg_r <= 1'b0;
      div_t     <= T_U8;
    end else begin
      done <= 1'b0;
      if (start) begin
        two_out  <= !single;
        implicit <= use_imm && (op != A_ISNAR);
        illegal  <= (op == A_BAD);
        if (op == A_ISNAR) begin
          low  <= mk_int(T_U8, r_lo);
          high <= '0;
          done <= 1'b1;
        end else if (n_ops == 3'd0) begin
          low  <= mk_nar(NAR_NO_OPND);
          high <= mk_nar(NAR_NO_OPND);
          done <= 1'b1;
        end else if (any_nar) begin
          low  <= nar_src;
          high <= nar_src;
          done <= 1'b1;
        end else if (bad_type || op == A_BAD) begin
          low  <= mk_nar(NAR_BAD_TYPE);
          high <= mk_nar(NAR_BAD_TYPE);
          done <= 1'b1;
        end else if (op == A_DIV && div_zero) begin
          low  <= mk_nar(NAR_DIV_ZERO);
          high <= mk_nar(NAR_DIV_ZERO);
          done <= 1'b1;
        end else if (op == A_DIV) begin
          pend_div  <= 1'b1;
          div_neg_q <= sgn && (sa[XLEN-1] ^ sb[XLEN-1]);
          div_neg_r <= sgn && sa[XLEN-1];
          div_t     <= t;
        end else begin
          low  <= mk_int(r_t, r_lo);
          high <= mk_int(r_t, r_hi);
          done <= 1'b1;
        end
      end else if (pend_div && div_done) begin
        pend_div <= 1'b0;
        low      <= mk_int(div_t, div_neg_q ? -div_q : div_q);
        high     <= mk_int(div_t, div_neg_r ? -div_r : div_r);
        done     <= 1'b1;
      end
    end
  end

  assign busy = pend_div || div_busy;

endmodule
