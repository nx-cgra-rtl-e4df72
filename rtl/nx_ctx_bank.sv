// nx_ctx_bank: one context memory bank, a 2 KiB single-port SRAM of 512 x 32-bit words.
//
// In silicon this is a foundry SRAM macro; here it is written as a synchronous array with the
// macro's usual interface: one access per cycle, chip enable, write enable with byte enables,
// read data valid in the cycle after the read. Depth and width are the published ones; the
// port list and one-cycle read latency are this design's choice.
module nx_ctx_bank #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk_i,
  input  logic               ce_i,
  input  logic               we_i,
  input  logic [WIDTH/8-1:0] be_i,
  input  logic [AW-1:0]      addr_i,
  input  logic [WIDTH-1:0]   wdata_i,
  output logic [WIDTH-1:0]   rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (ce_i) begin
      if (we_i) begin
        for (int b = 0; b < WIDTH/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
