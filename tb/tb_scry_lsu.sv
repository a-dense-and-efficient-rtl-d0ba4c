// tb_scry_lsu: self-checking test of scry_lsu with a behavioural memory.
//
// Random stores then loads through every addressing mode: unsigned base
// (absolute), signed base (relative to the instruction address), signed
// displacement (bytes) and unsigned displacement (index scaled by access
// size), for every integer type. Expected addresses and data are computed
// here from the ISA's rules and read back from a byte-array shadow. Directed
// cases: NaR into a load gives a NaR, NaR into a store traps, an address
// outside memory gives a NaR load and a trapping store, a store with one
// operand traps.
module tb_scry_lsu;
  import scry_pkg::*;

  localparam int MSIZE = 1024;

  logic            clk = 0, rst_n = 0;
  logic            start = 0, is_store = 0;
  type_t           ld_type = T_U8;
  operand_t        ops [MAX_OPS];
  logic [2:0]      n_ops = 0;
  logic [XLEN-1:0] pc = 0;
  logic            done, store_trap;
  operand_t        result;
  logic            dmem_req, dmem_we, dmem_rvalid, dmem_err;
  logic [XLEN-1:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic [1:0]      dmem_size;
  int              checks = 0, failures = 0, cycles = 0;

  scry_lsu dut (.*);
  scry_mem_model #(.SIZE(MSIZE), .LATENCY(3)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic [7:0] shadow [MSIZE];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s addr=%h res=%h/%h/%b trap=%b", what, dmem_addr,
                                  result.tag, result.value, result.nar, store_trap);
    end
  endtask

  function automatic operand_t opnd(type_t t, logic [63:0] v);
    operand_t o; o.nar = 0; o.tag = t; o.value = canon(t, v); return o;
  endfunction

  task automatic go();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  // Build base/disp operands that address 'ea' in one of four modes.
  task automatic mk_addr(input logic [63:0] ea, input int lg, input int mode,
                         output operand_t base, output operand_t disp, output int nops);
    logic [63:0] idx;
    case (mode)
      0: begin base = opnd(T_U64, ea); nops = 1; end                        // absolute
      1: begin base = opnd(T_I32, ea - pc); nops = 1; end                   // pc-relative
      2: begin base = opnd(T_U16, ea - 5); disp = opnd(T_I8, 5); nops = 2; end  // + signed byte disp
      default: begin                                                         // + scaled index
        idx  = 64'($urandom % 4);
        base = opnd(T_U64, ea - (idx << lg)); disp = opnd(T_U8, idx); nops = 2;
      end
    endcase
  endtask

  initial begin
    operand_t base, disp;
    int nops;
    for (int i = 0; i < MAX_OPS; i++) ops[i] = '0;
    for (int i = 0; i < MSIZE; i++) shadow[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int k = 0; k < 400; k++) begin
      automatic type_t t = {1'b0, 3'($urandom)};
      automatic int lg = int'(t[2:1]);
      automatic logic [63:0] ea = 64'((($urandom % 100) + 8) << lg);
      automatic logic [63:0] v = {$urandom, $urandom};
      logic [63:0] exp_v;
      pc = 64'(($urandom % 256) * 2);
      // store v with type t
      mk_addr(ea, lg, $urandom % 4, base, disp, nops);
      is_store = 1; ops[0] = opnd(t, v); ops[1] = base; ops[2] = disp; n_ops = 3'(nops + 1);
      go();
      chk("store ok", !store_trap);
      for (int i = 0; i < (1 << lg); i++) shadow[ea + i] = v[8*i +: 8];
      // load it back through another mode
      mk_addr(ea, lg, $urandom % 4, base, disp, nops);
      is_store = 0; ld_type = t; ops[0] = base; ops[1] = disp; n_ops = 3'(nops);
      go();
      exp_v = '0;
      for (int i = 0; i < (1 << lg); i++) exp_v[8*i +: 8] = shadow[ea + i];
      chk("load value", !result.nar && result.tag == t && result.value == canon(t, exp_v));
    end

    // NaR into a load -> NaR; into a store -> trap
    is_store = 0; ops[0] = mk_nar(NAR_DIV_ZERO); n_ops = 1; go();
    chk("ld nar", result.nar && result.value[7:0] == NAR_DIV_ZERO);
    is_store = 1; ops[0] = mk_nar(NAR_DIV_ZERO); ops[1] = opnd(T_U64, 16); n_ops = 2; go();
    chk("st nar trap", store_trap);
    // out of range
    is_store = 0; ld_type = T_U32; ops[0] = opnd(T_U64, 64'hFFFF_0000); n_ops = 1; go();
    chk("ld fault", result.nar && result.value[7:0] == NAR_MEM_FAULT);
    is_store = 1; ops[0] = opnd(T_U8, 1); ops[1] = opnd(T_U64, 64'd5000); n_ops = 2; go();
    chk("st fault trap", store_trap);
    // store with only the value
    is_store = 1; n_ops = 1; go();
    chk("st one operand", store_trap);
    // a good store after traps clears the flag
    ops[1] = opnd(T_U64, 64'd8); n_ops = 2; go();
    chk("st ok again", !store_trap && u_mem.mem[8] == 8'd1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 50_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
