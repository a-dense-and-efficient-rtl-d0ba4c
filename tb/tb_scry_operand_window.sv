// tb_scry_operand_window: self-checking test of scry_operand_window.
//
// A scoreboard (a queue of operands per slot, capped at four) mirrors what
// should be stored. Random appends to random slots, random consumes of the
// read slot, and a sweep that fills slots past four operands check arrival
// order, the count, the drop flag, clearing, and that a write made in the
// same cycle as the clear of its slot lands after the clear (the reference
// that wraps onto the slot being consumed). Read data is checked one cycle
// after the slot is presented.
module tb_scry_operand_window;
  import scry_pkg::*;

  localparam int DEPTH = 1024;  // the window's default depth
  localparam int AW    = $clog2(DEPTH);

  logic          clk = 0, rst_n = 0;
  logic [AW-1:0] rd_slot = '0, wr_slot = '0;
  operand_t      rd_ops [MAX_OPS];
  logic [2:0]    rd_count;
  logic          clr = 0, wr_en = 0, drop;
  operand_t      wr_data = '0;
  int            checks = 0, failures = 0, cycles = 0, drops_seen = 0;

  scry_operand_window dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  operand_t sb [DEPTH][$];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s slot=%0d", what, rd_slot);
    end
  endtask

  function automatic operand_t rnd_op();
    operand_t o;
    o.nar = 1'($urandom); o.tag = 4'($urandom); o.value = {$urandom, $urandom};
    return o;
  endfunction

  // one clock with the given controls; updates the scoreboard
  task automatic step(logic c, logic w, logic [AW-1:0] ws, operand_t d);
    logic exp_drop;
    @(negedge clk);
    clr = c; wr_en = w; wr_slot = ws; wr_data = d;
    #1;
    if (c) sb[rd_slot].delete();
    exp_drop = w && (sb[ws].size() == MAX_OPS);
    if (w) begin
      chk("drop flag", drop == exp_drop);
      if (exp_drop) drops_seen++;
      else sb[ws].push_back(d);
    end
    @(posedge clk); #1;
    clr = 0; wr_en = 0;
  endtask

  task automatic check_slot(logic [AW-1:0] s);
    @(negedge clk);
    rd_slot = s;
    #1;
    chk("count", rd_count == 3'(sb[s].size()));
    @(posedge clk); #1;
    for (int i = 0; i < sb[s].size(); i++) chk("data/order", rd_ops[i] == sb[s][i]);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < DEPTH; s++) check_slot(AW'(s));  // all empty after reset

    // fill slot 5 with six operands: the fifth and sixth are dropped
    for (int i = 0; i < 6; i++) step(0, 1, AW'(5), rnd_op());
    check_slot(AW'(5));
    chk("drops", drops_seen == 2);

    // clear slot 5 while writing to it in the same cycle
    rd_slot = AW'(5);
    step(1, 1, AW'(5), rnd_op());
    check_slot(AW'(5));
    chk("clear then write", rd_count == 3'd1);

    // random traffic
    for (int k = 0; k < 12000; k++) begin
      automatic logic [AW-1:0] s = AW'($urandom);
      if ($urandom % 8 == 0) begin
        rd_slot = AW'($urandom);
        step(1, 0, '0, '0);
      end else begin
        step(0, 1, s, rnd_op());
      end
      if (k % 16 == 0) check_slot(AW'($urandom));
    end
    for (int s = 0; s < DEPTH; s++) check_slot(AW'(s));

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
