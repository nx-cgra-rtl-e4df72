// nx_cfg_rf: configuration register file of a core: the micro-code instruction RF or the
// inline constant RF.
//
// DEPTH x 32-bit flip-flop registers. Port 1 (cfg_*) is written by the memory controller while
// context is distributed before start. Port 2 (core_*) is a write port from the core itself,
// used by the MOB, whose constant RF has its own read/write address and write data in the
// published diagram; in a PE it is tied off. Two asynchronous read ports (the instruction RF
// uses one). The configuration write wins if both write the same cycle. Registers reset to 0
// (NOP). The depths are this design's choice.
module nx_cfg_rf #(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          cfg_we_i,
  input  logic [AW-1:0] cfg_addr_i,
  input  logic [31:0]   cfg_wdata_i,
  input  logic          core_we_i,
  input  logic [AW-1:0] core_waddr_i,
  input  logic [31:0]   core_wdata_i,
  input  logic [AW-1:0] raddr_a_i,
  input  logic [AW-1:0] raddr_b_i,
  output logic [31:0]   rdata_a_o,
  output logic [31:0]   rdata_b_o
);
  logic [31:0] regs [DEPTH];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < DEPTH; i++) regs[i] <= '0;
    end else if (cfg_we_i) begin
      regs[cfg_addr_i] <= cfg_wdata_i;
    end else if (core_we_i) begin
      regs[core_waddr_i] <= core_wdata_i;
    end
  end

  assign rdata_a_o = regs[raddr_a_i];
  assign rdata_b_o = regs[raddr_b_i];
endmodule
