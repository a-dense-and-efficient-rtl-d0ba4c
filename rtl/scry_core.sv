// scry_core: an in-order, multi-cycle processor for the Scry ISA.
//
// Scry has no architectural registers. Each instruction names when its
// result is consumed ("forward-temporal referencing"): output reference r
// of the n-th executed instruction goes to the (n+1+r)-th executed
// instruction, whatever path control flow takes. Inputs are implicit: an
// instruction consumes whatever operands earlier instructions sent to it,
// up to four, in producer order, and many instructions change meaning with
// that count (an add with one operand increments). Operands carry a type
// tag, so one add/ld/st encoding serves every integer type, and errors
// produce Not-a-Result (NaR) values that trap only at a store or a
// control-flow instruction.
//
// Datapath: scry_decoder decodes the fetched word; scry_operand_window holds
// the operand slots, indexed by the count of executed instructions;
// scry_alu, scry_lsu and scry_trigger_unit execute ALU, memory and jmp/ret;
// data-flow instructions (echo, echo.l, dup, pick, pick.i, nop, const, grow,
// cast) are handled here. Every instruction runs the same sequence:
//   FETCH  present pc to instruction memory and the current slot to the
//          window; a pending jmp/ret whose trigger is pc acts here instead.
//   LATCH  capture the word, the slot's operands and count; clear the slot.
//   EXEC   decode; build the output list, or start the ALU/LSU (WAIT).
//   WRITE  send the outputs to their slots, one per cycle, then advance.
// So an instruction takes 3 cycles plus one per output operand, plus the
// memory latency for ld/st and XLEN+2 cycles for div. The ISA defines no
// timing; this schedule is this design's choice.
//
// Implemented: every encoding of the ISA except call, rsrv, free, ld.s,
// st.s and saddr, whose semantics (stack frames, calls) the ISA defines
// elsewhere; they halt the core with HALT_UNSUPPORTED. fence is a no-op
// because this core completes each memory access before the next
// instruction. ret halts the core with HALT_RET when its trigger is reached
// (the caller is outside this core); the operands then waiting in the
// current slot are the function's return values, visible on res_ops.
// Arguments are written into the first instruction's slot through the
// inject port before 'start', as a caller would send them.
// Design choices where the ISA is silent: pick takes (condition, a, b) and
// forwards a when the condition is non-zero; pick.i forwards operand Im;
// grow shifts its first operand left by 8 and ORs in imm, keeping the type;
// const sign-extends imm for signed types; cast retags every operand it
// gets; jmp's condition is its first operand, taken when non-zero; a
// missing operand where one is required gives a NaR (or a trap for
// st/jmp); operands beyond those an instruction uses are discarded.
//
// Memories are outside: imem_rdata must hold the 16-bit word at imem_addr
// one cycle after imem_addr is presented (synchronous read); the data port
// is described in scry_lsu.
module scry_core
  import scry_pkg::*;
#(
  parameter int unsigned WINDOW_DEPTH = 1024,
  localparam int unsigned AW          = $clog2(WINDOW_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // control
  input  logic            start,
  input  logic [XLEN-1:0] start_pc,
  input  logic            inj_valid,   // add an argument to the current slot
  input  operand_t        inj_op,
  output logic            running,
  output logic            halted,
  output halt_e           halt_cause,
  output logic [XLEN-1:0] pc_out,
  output operand_t        res_ops [MAX_OPS],  // current slot, valid while halted
  output logic [2:0]      res_count,
  output events_t         ev,
  // instruction memory
  output logic [XLEN-1:0] imem_addr,
  input  logic [15:0]     imem_rdata,
  // data memory
  output logic            dmem_req,
  output logic            dmem_we,
  output logic [XLEN-1:0] dmem_addr,
  output logic [1:0]      dmem_size,
  output logic [XLEN-1:0] dmem_wdata,
  input  logic            dmem_rvalid,
  input  logic [XLEN-1:0] dmem_rdata,
  input  logic            dmem_err
);

  localparam int unsigned OUTN = 3 * MAX_OPS;  // dup with s: 3 copies of 4

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LATCH, S_EXEC, S_WAIT, S_WRITE, S_HALT} state_e;

  typedef struct packed {
    logic [9:0] rref;   // output reference; the slot is cur + 1 + rref
    operand_t   op;
  } out_t;

  state_e          state;
  logic [XLEN-1:0] pc;
  logic [AW-1:0]   cur;
  logic [15:0]     ir;
  operand_t        opq [MAX_OPS];
  logic [2:0]      nq;
  out_t            outl [OUTN];
  logic [3:0]      n_out, wr_idx;

  // ---------------- decoder ----------------
  decoded_t dec;
  scry_decoder u_dec (.instr(ir), .dec);

  // ---------------- operand window ----------------
  operand_t   win_ops [MAX_OPS];
  logic [2:0] win_count;
  logic       win_clr, win_wr, win_drop;
  logic [AW-1:0] win_wr_slot;
  operand_t   win_wr_data;

  assign win_clr     = (state == S_LATCH);
  assign win_wr      = (state == S_WRITE && wr_idx < n_out) || (inj_valid && (state == S_IDLE || state == S_HALT));
  assign win_wr_slot = (state == S_WRITE) ? cur + AW'(1) + AW'(outl[wr_idx].rref) : cur;
  assign win_wr_data = (state == S_WRITE) ? outl[wr_idx].op : inj_op;

  scry_operand_window #(.DEPTH(WINDOW_DEPTH)) u_win (
    .clk, .rst_n,
    .rd_slot (cur),
    .rd_ops  (win_ops),
    .rd_count(win_count),
    .clr     (win_clr),
    .wr_en   (win_wr),
    .wr_slot (win_wr_slot),
    .wr_data (win_wr_data),
    .drop    (win_drop)
  );

  // ---------------- ALU ----------------
  logic     alu_start, alu_busy, alu_done, alu_two, alu_imp, alu_ill;
  operand_t alu_low, alu_high;
  assign alu_start = (state == S_EXEC) && (dec.op == OP_ALU);

  scry_alu u_alu (
    .clk, .rst_n,
    .start   (alu_start),
    .func    (dec.func),
    .mod     (dec.mod),
    .ops     (opq),
    .n_ops   (nq),
    .busy    (alu_busy),
    .done    (alu_done),
    .low     (alu_low),
    .high    (alu_high),
    .two_out (alu_two),
    .implicit(alu_imp),
    .illegal (alu_ill)
  );

  // ---------------- LSU ----------------
  logic     lsu_start, lsu_done, lsu_trap;
  operand_t lsu_res;
  assign lsu_start = (state == S_EXEC) && (dec.op == OP_LD || dec.op == OP_ST);

  scry_lsu u_lsu (
    .clk, .rst_n,
    .start      (lsu_start),
    .is_store   (dec.op == OP_ST),
    .ld_type    (dec.typ),
    .ops        (opq),
    .n_ops      (nq),
    .pc         (pc),
    .done       (lsu_done),
    .result     (lsu_res),
    .store_trap (lsu_trap),
    .dmem_req, .dmem_we, .dmem_addr, .dmem_size, .dmem_wdata,
    .dmem_rvalid, .dmem_rdata, .dmem_err
  );

  // ---------------- jmp / ret triggers ----------------
  logic            arm_jmp, arm_ret, redirect, ret_hit, cond_bad;
  logic [XLEN-1:0] redirect_pc;
  assign cond_bad = (nq == 3'd0) || opq[0].nar;
  assign arm_jmp  = (state == S_EXEC) && (dec.op == OP_JMP) && !cond_bad && (opq[0].value != '0);
  assign arm_ret  = (state == S_EXEC) && (dec.op == OP_RET) && !(nq != 3'd0 && opq[0].nar);

  scry_trigger_unit u_trig (
    .clk, .rst_n,
    .arm_jmp, .arm_ret,
    .pc      (pc),
    .trig    (dec.trig),
    .imm     (dec.imm7),
    .check   (state == S_FETCH),
    .cur_pc  (pc),
    .redirect,
    .redirect_pc,
    .ret_hit
  );

  // ---------------- data-flow results ----------------
  operand_t grow_res, pick_res, picki_res;
  operand_t cast_res [MAX_OPS];
  logic [XLEN-1:0] const_v;

  always_comb begin
    const_v = type_signed(dec.typ) ? {{56{dec.imm8[7]}}, dec.imm8} : {56'd0, dec.imm8};

    if (nq == 3'd0)                 grow_res = mk_nar(NAR_NO_OPND);
    else if (opq[0].nar)            grow_res = opq[0];
    else                            grow_res = mk_int(opq[0].tag, {opq[0].value[XLEN-9:0], dec.imm8});

    if (nq < 3'd3)                  pick_res = mk_nar(NAR_NO_OPND);
    else if (opq[0].nar)            pick_res = opq[0];
    else                            pick_res = (opq[0].value != '0) ? opq[1] : opq[2];

    picki_res = ({1'b0, dec.im} < nq) ? opq[dec.im] : mk_nar(NAR_NO_OPND);

    for (int i = 0; i < MAX_OPS; i++) begin
      if (opq[i].nar)               cast_res[i] = opq[i];
      else if (!type_valid(dec.typ)) cast_res[i] = mk_nar(NAR_BAD_TYPE);
      else                          cast_res[i] = mk_int(dec.typ, opq[i].value);
    end
  end

  // ---------------- control ----------------
  logic nar_out;  // the output list being written holds a NaR

  always_comb begin
    nar_out = 1'b0;
    for (int i = 0; i < OUTN; i++)
      if (4'(i) < n_out && outl[i].op.nar) nar_out = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pc         <= '0;
      cur        <= '0;
      ir         <= '0;
      nq         <= '0;
      n_out      <= '0;
      wr_idx     <= '0;
      halt_cause <= HALT_NONE;
      ev         <= '0;
      for (int i = 0; i < MAX_OPS; i++) opq[i] <= '0;
      for (int i = 0; i < OUTN; i++)    outl[i] <= '0;
    end else begin
      ev <= '0;
      ev.opnd_drop <= win_drop;
      unique case (state)
        S_IDLE, S_HALT: begin
          if (start) begin
            pc         <= start_pc;
            halt_cause <= HALT_NONE;
            state      <= S_FETCH;
          end
        end

        S_FETCH: begin
          if (ret_hit) begin
            halt_cause <= HALT_RET;
            state      <= S_HALT;
          end else if (redirect) begin
            pc           <= redirect_pc;
            ev.jmp_taken <= 1'b1;
          end else begin
            state <= S_LATCH;
          end
        end

        S_LATCH: begin
          ir    <= imem_rdata;
          opq   <= win_ops;
          nq    <= win_count;
          state <= S_EXEC;
        end

        S_EXEC: begin
          n_out  <= '0;
          wr_idx <= '0;
          state  <= S_WRITE;
          unique case (dec.op)
            OP_TRAP: begin halt_cause <= HALT_TRAP; state <= S_HALT; end
            OP_ILLEGAL: begin halt_cause <= HALT_ILLEGAL; state <= S_HALT; end
            OP_RSRV, OP_FREE, OP_STS, OP_LDS, OP_SADDR, OP_CALL: begin
              halt_cause <= HALT_UNSUPPORTED;
              state      <= S_HALT;
            end
            OP_NOP, OP_FENCE: ;
            OP_JMP: begin
              if (cond_bad) begin
                halt_cause <= HALT_NAR_TRAP;
                state      <= S_HALT;
              end
              ev.jmp_skip <= !cond_bad && (opq[0].value == '0);
            end
            OP_RET: begin
              if (nq != 3'd0 && opq[0].nar) begin
                halt_cause <= HALT_NAR_TRAP;
                state      <= S_HALT;
              end
            end
            OP_CONST: begin
              outl[0] <= '{rref: '0, op: mk_int(dec.typ, const_v)};
              n_out   <= 4'd1;
            end
            OP_GROW: begin
              outl[0] <= '{rref: '0, op: grow_res};
              n_out   <= 4'd1;
            end
            OP_PICK: begin
              outl[0] <= '{rref: dec.ref1, op: pick_res};
              n_out   <= 4'd1;
              ev.pick <= 1'b1;
            end
            OP_PICKI: begin
              outl[0] <= '{rref: dec.ref1, op: picki_res};
              n_out   <= 4'd1;
              ev.pick <= 1'b1;
            end
            OP_ECHOL: begin
              for (int i = 0; i < MAX_OPS; i++) outl[i] <= '{rref: dec.ref1, op: opq[i]};
              n_out        <= {1'b0, nq};
              ev.long_echo <= (nq != 3'd0) && (dec.ref1 > 10'd31);
            end
            OP_CAST: begin
              for (int i = 0; i < MAX_OPS; i++) outl[i] <= '{rref: dec.ref1, op: cast_res[i]};
              n_out <= {1'b0, nq};
            end
            OP_ECHO: begin
              outl[0] <= '{rref: dec.ref1, op: opq[0]};
              outl[1] <= '{rref: 10'(dec.ref2), op: opq[1]};
              outl[2] <= '{rref: '0, op: opq[2]};
              outl[3] <= '{rref: '0, op: opq[3]};
              n_out   <= (nq > 3'd2 && !dec.s) ? 4'd2 : {1'b0, nq};
              ev.pass_next <= dec.s && nq > 3'd2;
            end
            OP_DUP: begin
              for (int i = 0; i < MAX_OPS; i++) begin
                outl[3*i]   <= '{rref: dec.ref1, op: opq[i]};
                outl[3*i+1] <= '{rref: 10'(dec.ref2), op: opq[i]};
                outl[3*i+2] <= '{rref: '0, op: opq[i]};
              end
              ev.pass_next <= dec.s && nq != 3'd0;
              // with s the three copies of each input are consecutive;
              // without s the 'next' copies are skipped by compaction below
              n_out <= 4'(nq) * 4'd3;
              if (!dec.s) begin
                for (int i = 0; i < MAX_OPS; i++) begin
                  outl[2*i]   <= '{rref: dec.ref1, op: opq[i]};
                  outl[2*i+1] <= '{rref: 10'(dec.ref2), op: opq[i]};
                end
                n_out <= 4'(nq) * 4'd2;
              end
            end
            OP_ALU, OP_LD, OP_ST: state <= S_WAIT;
            default: ;
          endcase
        end

        S_WAIT: begin
          if (alu_done) begin
            ev.implicit_imm <= alu_imp;
            ev.two_output   <= alu_two;
            if (alu_ill) begin
              halt_cause <= HALT_ILLEGAL;
              state      <= S_HALT;
            end else begin
              state <= S_WRITE;
              unique case (dec.mod)
                3'd1: begin  // low then high, same target
                  outl[0] <= '{rref: dec.ref1, op: alu_low};
                  outl[1] <= '{rref: dec.ref1, op: alu_high};
                  n_out   <= 4'd2;
                end
                3'd2: begin  // high then low, same target
                  outl[0] <= '{rref: dec.ref1, op: alu_high};
                  outl[1] <= '{rref: dec.ref1, op: alu_low};
                  n_out   <= 4'd2;
                end
                3'd3: begin  // low to ref, high to next
                  outl[0] <= '{rref: dec.ref1, op: alu_low};
                  outl[1] <= '{rref: '0, op: alu_high};
                  n_out   <= 4'd2;
                  ev.pass_next <= 1'b1;
                end
                3'd4: begin  // high to ref, low to next
                  outl[0] <= '{rref: dec.ref1, op: alu_high};
                  outl[1] <= '{rref: '0, op: alu_low};
                  n_out   <= 4'd2;
                  ev.pass_next <= 1'b1;
                end
                3'd6: begin  // high only
                  outl[0] <= '{rref: dec.ref1, op: alu_high};
                  n_out   <= 4'd1;
                end
                default: begin  // single-output ops (000, 111) and low only (101)
                  outl[0] <= '{rref: dec.ref1, op: alu_low};
                  n_out   <= 4'd1;
                end
              endcase
            end
          end else if (lsu_done) begin
            if (dec.op == OP_ST) begin
              ev.store <= 1'b1;
              if (lsu_trap) begin
                halt_cause <= HALT_NAR_TRAP;
                state      <= S_HALT;
              end else begin
                n_out <= '0;
                state <= S_WRITE;
              end
            end else begin
              ev.load <= 1'b1;
              outl[0] <= '{rref: dec.ref1, op: lsu_res};
              n_out   <= 4'd1;
              state   <= S_WRITE;
            end
          end
        end

        S_WRITE: begin
          if (wr_idx < n_out) begin
            wr_idx <= wr_idx + 4'd1;
            if (wr_idx == '0) ev.nar_made <= nar_out;
          end else begin
            cur       <= cur + AW'(1);
            pc        <= pc + 64'd2;
            ev.retire <= 1'b1;
            state     <= S_FETCH;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  assign running   = (state != S_IDLE) && (state != S_HALT);
  assign halted    = (state == S_HALT);
  assign pc_out    = pc;
  assign imem_addr = pc;
  assign res_ops   = win_ops;
  assign res_count = win_count;

  // The ALU and LSU are started only from EXEC and never together.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n) !(alu_start && lsu_start));

endmodule
