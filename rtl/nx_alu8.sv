// nx_alu8: 8-bit ALU of a PE.
//
// Purely combinational. Published 8-bit operators: unsigned x unsigned multiply (MUL8U, 16-bit
// result), 4x fused signed multiply-accumulate (MAC4: the four signed byte lanes of A and B are
// multiplied pairwise and summed onto the 32-bit accumulator C), saturate (SAT8: clamp the
// signed 32-bit A to -128..127, sign-extended) and divide (DIV8: unsigned A[7:0] / B[7:0],
// 0xFF on a zero divisor). The published PE diagram shows only OpA and OpB on the 8-bit ALU;
// the accumulator input C used by MAC4 is this design's addition, taken from the same third
// temporary-register read port that feeds the 32-bit ALU.
module nx_alu8
  import nx_pkg::*;
(
  input  op_e         op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  output logic [31:0] rd_o
);
  logic signed [31:0] dot;

  always_comb begin
    dot = '0;
    for (int l = 0; l < 4; l++)
      dot += 32'($signed(a_i[l*8 +: 8]) * $signed(b_i[l*8 +: 8]));
  end

  always_comb begin
    unique case (op_i)
      OP_MUL8U: rd_o = {16'd0, 16'(a_i[7:0] * b_i[7:0])};
      OP_MAC4:  rd_o = c_i + dot;
      OP_SAT8:  begin
        if ($signed(a_i) > 32'sd127)       rd_o = 32'd127;
        else if ($signed(a_i) < -32'sd128) rd_o = 32'hFFFF_FF80;
        else                               rd_o = a_i;
      end
      OP_DIV8:  rd_o = (b_i[7:0] == 8'd0) ? 32'hFF : {24'd0, a_i[7:0] / b_i[7:0]};
      default:  rd_o = 32'd0;
    endcase
  end
endmodule
