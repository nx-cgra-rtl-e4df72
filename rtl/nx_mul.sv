// nx_mul: MUL16/32 unit of a PE.
//
// Purely combinational. MUL16U multiplies the unsigned low halves of A and B into a 32-bit
// product; MUL32 gives the low 32 bits of the signed x signed product. Single-cycle operation
// is this design's choice (the published design gives no latency).
module nx_mul
  import nx_pkg::*;
(
  input  op_e         op_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] rd_o
);
  logic signed [63:0] prod32;
  assign prod32 = $signed(a_i) * $signed(b_i);

  always_comb begin
    unique case (op_i)
      OP_MUL16U: rd_o = a_i[15:0] * b_i[15:0];
      OP_MUL32:  rd_o = prod32[31:0];
      default:   rd_o = 32'd0;
    endcase
  end
endmodule
