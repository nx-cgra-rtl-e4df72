// nx_div32: DIV32 unit of a PE.
//
// Purely combinational 32-bit divider: signed and unsigned quotient (DIV, DIVU) and remainder
// (REM, REMU), rounding toward zero. Division by zero gives all ones for the quotient and the
// dividend for the remainder; the most negative number divided by -1 gives itself with
// remainder 0 (the RISC-V conventions). Single-cycle operation and these corner-case results
// are this design's choices; the published design only lists signed/unsigned divide.
module nx_div32
  import nx_pkg::*;
(
  input  op_e         op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] rd_o
);
  logic        a_neg, b_neg, ovf;
  logic [31:0] a_mag, b_mag, uq, ur, sq, sr;

  always_comb begin
    a_neg = a_i[31];
    b_neg = b_i[31];
    a_mag = a_neg ? -a_i : a_i;
    b_mag = b_neg ? -b_i : b_i;
    ovf   = (a_i == 32'h8000_0000) && (b_i == 32'hFFFF_FFFF);
    uq    = (b_i == 0) ? 32'hFFFF_FFFF : a_i / b_i;
    ur    = (b_i == 0) ? a_i : a_i % b_i;
    sq    = (b_mag == 0) ? 32'hFFFF_FFFF : a_mag / b_mag;
    sr    = (b_mag == 0) ? a_mag : a_mag % b_mag;
    if (b_i != 0 && !ovf && (a_neg ^ b_neg)) sq = -sq;
    if (b_i == 0) sr = a_i;
    else if (a_neg) sr = -sr;
    if (ovf) begin
      sq = 32'h8000_0000;
      sr = 32'd0;
    end
  end

  always_comb begin
    unique case (op_i)
      OP_DIV:  rd_o = sq;
      OP_DIVU: rd_o = uq;
      OP_REM:  rd_o = sr;
      OP_REMU: rd_o = ur;
      default: rd_o = 32'd0;
    endcase
  end
endmodule
