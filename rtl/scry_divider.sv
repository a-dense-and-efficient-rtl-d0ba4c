// scry_divider: iterative unsigned 64-bit divider used by scry_alu for div.
//
// Restoring radix-2 division, one quotient bit per clock. A 'start' pulse
// loads dividend and divisor; 'done' pulses XLEN+1 cycles later with quotient
// and remainder held stable until the next start. The divisor must be
// non-zero (the ALU turns division by zero into a NaR before getting here).
// The ISA only names the operation; the iterative structure is this
// design's choice, made to keep a 64-bit divider small.
module scry_divider
  import scry_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [XLEN-1:0] dividend,
  input  logic [XLEN-1:0] divisor,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] quotient,
  output logic [XLEN-1:0] remainder
);

  logic [XLEN-1:0] dvs_q;
  logic [6:0]      cnt_q;
  logic [XLEN:0]   trial;

  assign trial = {remainder, quotient[XLEN-1]} - {1'b0, dvs_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cnt_q     <= '0;
      dvs_q     <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        cnt_q     <= 7'(XLEN);
        dvs_q     <= divisor;
        quotient  <= dividend;
        remainder <= '0;
      end else if (busy) begin
        // shift {remainder, quotient} left; subtract when it fits
        if (!trial[XLEN]) begin
          remainder <= trial[XLEN-1:0];
          quotient  <= {quotient[XLEN-2:0], 1'b1};
        end else begin
          remainder <= {remainder[XLEN-2:0], quotient[XLEN-1]};
          quotient  <= {quotient[XLEN-2:0], 1'b0};
        end
        cnt_q <= cnt_q - 7'd1;
        if (cnt_q == 7'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
