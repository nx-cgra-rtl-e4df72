// nx_agu: address generation unit of a MOB's load-store unit.
//
// Forms the byte address of a memory access either directly from operand A or as the previous
// access address plus A (a signed stride), and keeps the address of the last accepted access
// as the next "previous address". This follows the previous/current address loop of the
// published MOB diagram; the two modes and the signed stride are this design's choice.
module nx_agu (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        use_prev_i,  // 1: prev + offset, 0: offset is the address
  input  logic [31:0] offset_i,
  input  logic        update_i,    // access accepted: remember its address
  output logic [31:0] addr_o,
  output logic [31:0] prev_o
);
  assign addr_o = use_prev_i ? prev_o + offset_i : offset_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)       prev_o <= '0;
    else if (update_i) prev_o <= addr_o;
  end
endmodule
