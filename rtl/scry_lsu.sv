// scry_lsu: load/store unit of the Scry core.
//
// Scry has one load and one store encoding; the operand tags pick the
// addressing mode (type polymorphism) and the operand count picks whether a
// displacement is present (operand-count polymorphism):
//   ld  type: operands (base [, disp]); result tagged with 'type'.
//   st      : operands (value, base [, disp]); access size from value's tag.
//   base unsigned -> absolute address (zero-extended to the pointer width)
//   base signed   -> sign-extended, added to the instruction's own address
//   disp signed   -> added as a byte offset
//   disp unsigned -> an index, scaled by the access size, then added
// A load given a NaR, a reserved type or a failing access returns a NaR;
// a store given a NaR traps (store_trap), as the ISA requires.
// Design choices: a load without operands returns a NaR; a store with fewer
// than two operands, a reserved tag or a failing access also traps; extra
// operands are ignored; memory is little-endian, byte-addressed.
//
// Memory port: dmem_req/we/addr/size(log2 bytes)/wdata are held from the
// cycle after 'start' until dmem_rvalid; dmem_rdata is right-aligned load
// data, dmem_err flags an invalid address. One access at a time.
// Timing: 'done' pulses the cycle after dmem_rvalid, or one cycle after
// 'start' when no access is made.
module scry_lsu
  import scry_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            is_store,
  input  type_t           ld_type,
  input  operand_t        ops [MAX_OPS],
  input  logic [2:0]      n_ops,
  input  logic [XLEN-1:0] pc,
  output logic            done,
  output operand_t        result,
  output logic            store_trap,
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

  operand_t        base, disp, val;
  logic            has_disp, any_nar, bad, too_few;
  logic [1:0]      lg;
  logic [XLEN-1:0] ea;
  operand_t        nar_src;

  always_comb begin
    val      = ops[0];
    base     = is_store ? ops[1] : ops[0];
    disp     = is_store ? ops[2] : ops[1];
    has_disp = is_store ? (n_ops >= 3'd3) : (n_ops >= 3'd2);
    too_few  = is_store ? (n_ops < 3'd2) : (n_ops == 3'd0);
    lg       = is_store ? type_log2bytes(val.tag) : type_log2bytes(ld_type);
    any_nar  = base.nar || (has_disp && disp.nar) || (is_store && val.nar);
    nar_src  = (is_store && val.nar) ? val : base.nar ? base : disp;
    bad      = !type_valid(base.tag) || (has_disp && !type_valid(disp.tag)) ||
               (is_store ? !type_valid(val.tag) : !type_valid(ld_type));
    ea = type_signed(base.tag) ? (pc + base.value) : base.value;
    if (has_disp)
      ea = ea + (type_signed(disp.tag) ? disp.value : (disp.value << lg));
  end

  type_t ld_type_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done       <= 1'b0;
      result     <= '0;
      store_trap <= 1'b0;
      dmem_req   <= 1'b0;
      dmem_we    <= 1'b0;
      dmem_addr  <= '0;
      dmem_size  <= '0;
      dmem_wdata <= '0;
      ld_type_q  <= T_U8;
    end else begin
      done <= 1'b0;
      if (start) begin
        store_trap <= 1'b0;
        ld_type_q  <= ld_type;
        if (too_few) begin
          done       <= 1'b1;
          result     <= mk_nar(NAR_NO_OPND);
          store_trap <= is_store;
        end else if (any_nar) begin
          done       <= 1'b1;
          result     <= nar_src;
          store_trap <= is_store;
        end else if (bad) begin
          done       <= 1'b1;
          result     <= mk_nar(NAR_BAD_TYPE);
          store_trap <= is_store;
        end else begin
          dmem_req   <= 1'b1;
          dmem_we    <= is_store;
          dmem_addr  <= ea;
          dmem_size  <= lg;
          dmem_wdata <= val.value & type_mask(val.tag);
        end
      end else if (dmem_req && dmem_rvalid) begin
        dmem_req <= 1'b0;
        done     <= 1'b1;
        if (dmem_err) begin
          result     <= mk_nar(NAR_MEM_FAULT);
          store_trap <= dmem_we;
        end else begin
          result <= mk_int(ld_type_q, dmem_rdata);
        end
      end
    end
  end

  // A request stays up, unchanged, until the memory answers.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      dmem_req && !dmem_rvalid |=> dmem_req && $stable(dmem_addr) && $stable(dmem_we);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
