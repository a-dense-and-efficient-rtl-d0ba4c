// tb_scry_trigger_unit: self-checking test of scry_trigger_unit.
//
// Arms jumps and returns at random addresses with random trig/imm fields and
// walks cur_pc forward; checks that redirect fires exactly at
// pc + 2 + 2*trig with target pc + 2 + 2*imm (imm signed), that ret_hit fires
// at its trigger, that a fired entry is cleared, that nothing fires while
// check is low, and that ret wins when both hit the same address.
module tb_scry_trigger_unit;
  import scry_pkg::*;

  logic            clk = 0, rst_n = 0;
  logic            arm_jmp = 0, arm_ret = 0, check = 0;
  logic [XLEN-1:0] pc = 0, cur_pc = 0, redirect_pc;
  logic [5:0]      trig = 0;
  logic [6:0]      imm = 0;
  logic            redirect, ret_hit;
  int              checks = 0, failures = 0, cycles = 0;

  scry_trigger_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s cur=%0d redirect=%b ret=%b", what, cur_pc, redirect, ret_hit);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      automatic logic is_ret = (k % 3 == 0);
      automatic longint base = 1000 + 2 * ($urandom % 500);
      longint tpc, tgt;
      @(negedge clk);
      pc = 64'(base); trig = 6'($urandom); imm = 7'($urandom);
      tpc = base + 2 + 2 * trig;
      tgt = base + 2 + 2 * longint'($signed(imm));
      if (is_ret) arm_ret = 1; else arm_jmp = 1;
      @(negedge clk); arm_ret = 0; arm_jmp = 0;
      // walk from the instruction after the jmp up to two past the trigger
      for (longint a = base + 2; a <= tpc + 4; a += 2) begin
        cur_pc = 64'(a); check = ($urandom % 5 != 0) || (a == tpc);
        #1;
        if (is_ret) chk("ret_hit", ret_hit == (check && a == tpc) && !redirect);
        else        chk("redirect", redirect == (check && a == tpc) && !ret_hit &&
                                    (!redirect || redirect_pc == 64'(tgt)));
        @(negedge clk);
      end
      check = 0;
    end
    // both pending at the same address: return wins, jump stays pending
    @(negedge clk); pc = 64'd100; trig = 6'd3; imm = 7'd10; arm_jmp = 1; arm_ret = 1;
    @(negedge clk); arm_jmp = 0; arm_ret = 0; cur_pc = 64'd108; check = 1; #1;
    chk("ret priority", ret_hit && !redirect);
    @(negedge clk); #1;
    chk("jmp after ret", redirect && redirect_pc == 64'd122);
    @(negedge clk); #1;
    chk("cleared", !redirect && !ret_hit);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 100_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
