// scry_operand_window: storage for in-flight operands under forward-temporal
// referencing.
//
// An instruction names when its outputs are consumed, counted in executed
// instructions: reference r from the n-th executed instruction lands in the
// input list of instruction n+1+r. This window keeps one slot per future
// instruction, indexed by the dynamic instruction count modulo DEPTH. Each
// slot holds up to MAX_OPS (4) operands in arrival order, which is the
// order the ISA defines (earlier producer first); an operand arriving at a
// full slot is dropped and 'drop' pulses, as the ISA drops operands beyond
// the fourth.
//
// DEPTH = 1024 covers the longest reference, echo.l's 10-bit field (1024
// instructions ahead): the target n+1024 maps onto slot n, which the core
// clears when instruction n consumes it, before any output is written.
//
// Structure (this design's choice): four banks of DEPTH operands, bank k
// holding the k-th operand of every slot, each a 1-write/1-read memory, and
// a DEPTH x 3-bit count array in flip-flops. A write appends at bank
// count[slot].
//
// Interface and timing:
//   rd_slot  -> rd_ops[0..3] one cycle later (registered read);
//              rd_count is combinational on rd_slot.
//   clr      clears slot rd_slot at the clock edge (consume).
//   wr_en    appends wr_data to slot wr_slot at the clock edge. If clr and
//            wr_en hit the same slot in one cycle the clear happens first.
module scry_operand_window
  import scry_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] rd_slot,
  output operand_t      rd_ops [MAX_OPS],
  output logic [2:0]    rd_count,
  input  logic          clr,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_slot,
  input  operand_t      wr_data,
  output logic          drop
);

  logic [2:0] count [DEPTH];
  logic [2:0] wr_cnt;

  assign rd_count = count[rd_slot];
  assign wr_cnt   = (clr && (rd_slot == wr_slot)) ? 3'd0 : count[wr_slot];
  assign drop     = wr_en && (wr_cnt == 3'(MAX_OPS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) count[i] <= '0;
    end else begin
      if (clr) count[rd_slot] <= '0;
      if (wr_en && !drop) count[wr_slot] <= wr_cnt + 3'd1;
    end
  end

  for (genvar b = 0; b < MAX_OPS; b++) begin : g_bank
    operand_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && !drop && wr_cnt == 3'(b)) mem[wr_slot] <= wr_data;
      rd_ops[b] <= mem[rd_slot];
    end
  end

endmodule
