// nx_trf: temporary value register file of a PE.
//
// DEPTH x 32-bit flip-flop registers with three asynchronous read ports (operands A, B and C)
// and one synchronous write port, as published ("triple-read ports and single-port write
// access"). Registers reset to zero. The depth is this design's choice.
module nx_trf #(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [AW-1:0] raddr_a_i,
  input  logic [AW-1:0] raddr_b_i,
  input  logic [AW-1:0] raddr_c_i,
  output logic [31:0]   rdata_a_o,
  output logic [31:0]   rdata_b_o,
  output logic [31:0]   rdata_c_o,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [31:0]   wdata_i
);
  logic [31:0] regs [DEPTH];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < DEPTH; i++) regs[i] <= '0;
    end else if (we_i) begin
      regs[waddr_i] <= wdata_i;
    end
  end

  assign rdata_a_o = regs[raddr_a_i];
  assign rdata_b_o = regs[raddr_b_i];
  assign rdata_c_o = regs[raddr_c_i];
endmodule
