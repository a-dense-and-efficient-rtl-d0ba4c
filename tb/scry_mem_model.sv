// scry_mem_model: behavioural little-endian data memory for the testbenches.
//
// Answers each request of the core's data port (held until dmem_rvalid)
// LATENCY cycles after it appears. Accesses at or above SIZE bytes return
// dmem_err (an invalid address). Byte array contents are reachable by
// hierarchical reference (mem) for preloading and checking.
module scry_mem_model
  import scry_pkg::*;
#(
  parameter int SIZE    = 4096,
  parameter int LATENCY = 2
) (
  input  logic            clk,
  input  logic            dmem_req,
  input  logic            dmem_we,
  input  logic [XLEN-1:0] dmem_addr,
  input  logic [1:0]      dmem_size,
  input  logic [XLEN-1:0] dmem_wdata,
  output logic            dmem_rvalid,
  output logic [XLEN-1:0] dmem_rdata,
  output logic            dmem_err
);

  logic [7:0] mem [SIZE];
  int         wait_cnt = 0;

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = 8'h00;
    dmem_rvalid = 0; dmem_rdata = 0; dmem_err = 0;
  end

  always @(posedge clk) begin
    dmem_rvalid <= 1'b0;
    if (dmem_req && !dmem_rvalid) begin
      if (wait_cnt < LATENCY - 1) begin
        wait_cnt <= wait_cnt + 1;
      end else begin
        int nb;
        wait_cnt <= 0;
        nb = 1 << dmem_size;
        dmem_rvalid <= 1'b1;
        dmem_err    <= (dmem_addr + XLEN'(nb) > XLEN'(SIZE));
        dmem_rdata  <= '0;
        if (dmem_addr + XLEN'(nb) <= XLEN'(SIZE)) begin
          if (dmem_we) begin
            for (int i = 0; i < nb; i++) mem[int'(dmem_addr) + i] <= dmem_wdata[8*i +: 8];
          end else begin
            logic [XLEN-1:0] d;
            d = '0;
            for (int i = 0; i < nb; i++) d[8*i +: 8] = mem[int'(dmem_addr) + i];
            dmem_rdata <= d;
          end
        end
      end
    end
  end

endmodule
