// scry_trigger_unit: delayed control transfer for Scry jmp and ret.
//
// Scry's jmp names two labels: the target and a "trigger". When a jmp's
// condition holds, nothing happens at once; execution continues until it
// reaches the trigger address, and the instruction there is not executed:
// fetch continues at the target instead. ret likewise names the point at
// which the return takes effect; "ret 0" returns right after itself.
// This unit holds one pending jump and one pending return and compares each
// with the address about to execute.
//
// Offsets, as this design reads the ISA's examples: trig and the jmp
// immediate count instructions from the instruction after the jmp/ret, so
// trigger = pc + 2 + 2*trig (trig unsigned, 6 bits) and
// target  = pc + 2 + 2*imm (imm signed, 7 bits), pc being byte addresses of
// 16-bit instructions. The ISA leaves the exact jmp/call/ret semantics out of
// scope; these formulas, one pending entry of each kind (a newer one
// replaces an older), and the return taking priority when both hit the
// same address are this design's choices.
//
// Interface/timing: arm_jmp/arm_ret are sampled at the clock edge with pc
// (the jmp/ret's address) and the fields. check/cur_pc are compared
// combinationally: redirect/ret_hit are valid in the same cycle, and the
// matching entry is cleared at the next edge.
module scry_trigger_unit
  import scry_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            arm_jmp,
  input  logic            arm_ret,
  input  logic [XLEN-1:0] pc,
  input  logic [5:0]      trig,
  input  logic [6:0]      imm,
  input  logic            check,
  input  logic [XLEN-1:0] cur_pc,
  output logic            redirect,
  output logic [XLEN-1:0] redirect_pc,
  output logic            ret_hit
);

  logic            jmp_pend_q, ret_pend_q;
  logic [XLEN-1:0] jmp_trig_q, jmp_tgt_q, ret_trig_q;
  logic [XLEN-1:0] trig_pc, tgt_pc;

  assign trig_pc = pc + 64'd2 + {57'd0, trig, 1'b0};
  assign tgt_pc  = pc + 64'd2 + {{56{imm[6]}}, imm, 1'b0};

  assign ret_hit     = check && ret_pend_q && (cur_pc == ret_trig_q);
  assign redirect    = check && !ret_hit && jmp_pend_q && (cur_pc == jmp_trig_q);
  assign redirect_pc = jmp_tgt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      jmp_pend_q <= 1'b0;
      ret_pend_q <= 1'b0;
      jmp_trig_q <= '0;
      jmp_tgt_q  <= '0;
      ret_trig_q <= '0;
    end else begin
      if (redirect) jmp_pend_q <= 1'b0;
      if (ret_hit)  ret_pend_q <= 1'b0;
      if (arm_jmp) begin
        jmp_pend_q <= 1'b1;
        jmp_trig_q <= trig_pc;
        jmp_tgt_q  <= tgt_pc;
      end
      if (arm_ret) begin
        ret_pend_q <= 1'b1;
        ret_trig_q <= trig_pc;
      end
    end
  end

endmodule
