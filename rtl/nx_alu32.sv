// nx_alu32: 32-bit ALU of a PE.
//
// Purely combinational. Covers the published 32-bit operator classes: logic (AND, OR, XOR),
// shifts (SLL, SRL, SRA by B[4:0]), comparison (SLT, SLTU, SEQ giving 0 or 1), signed/unsigned
// add and subtract (two's complement, the same adder for both), and the custom operators:
// sub-word masking MERGE = (A & ~C) | (B & C), SEL = (C != 0) ? A : B, byte-lane extract BEXT and
// three-input add ADDC. The ALU takes the three operands OpA, OpB, OpC shown in the published
// PE diagram; the exact operator list of the custom group and its encoding are this design's
// choice. MOV passes A. Other opcodes give 0.
module nx_alu32
  import nx_pkg::*;
(
  input  op_e         op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic [31:0] c_i,
  input  logic [1:0]  lane_i,
  output logic [31:0] rd_o
);
  always_comb begin
    unique case (op_i)
      OP_MOV:   rd_o = a_i;
      OP_ADD:   rd_o = a_i + b_i;
      OP_SUB:   rd_o = a_i - b_i;
      OP_AND:   rd_o = a_i & b_i;
      OP_OR:    rd_o = a_i | b_i;
      OP_XOR:   rd_o = a_i ^ b_i;
      OP_SLL:   rd_o = a_i << b_i[4:0];
      OP_SRL:   rd_o = a_i >> b_i[4:0];
      OP_SRA:   rd_o = 32'($signed(a_i) >>> b_i[4:0]);
      OP_SLT:   rd_o = {31'd0, $signed(a_i) < $signed(b_i)};
      OP_SLTU:  rd_o = {31'd0, a_i < b_i};
      OP_SEQ:   rd_o = {31'd0, a_i == b_i};
      OP_MERGE: rd_o = (a_i & ~c_i) | (b_i & c_i);
      OP_SEL:   rd_o = (c_i != 32'd0) ? a_i : b_i;
      OP_BEXT:  rd_o = {24'd0, a_i[lane_i*8 +: 8]};
      OP_ADDC:  rd_o = a_i + b_i + c_i;
      default:  rd_o = 32'd0;
    endcase
  end
endmodule
