// nx_ctx_mem: NX-Context memory subsystem, 4 KiB holding the context (micro-code and
// constants) of all cores.
//
// Two 2 KiB banks of 512 x 32 bits (bank 0 = words 0..511, bank 1 = words 512..1023) with two
// OBI slave ports: ext_* from the host side, which writes the context before execution, and
// mc_* from the NX-memory controller, which reads it. Each bank serves one access per cycle;
// the memory controller has priority when both address the same bank, and the other port is
// granted as soon as its bank is free. Read data and rvalid come in the cycle after the grant
// (rvalid also answers writes). The banks' clock is gated by the subsystem's own clock gate
// unit and runs only in cycles with an access. Bank count and size follow the published
// design; the banking by address half, the arbitration and the timing are this design's
// choice.
module nx_ctx_mem
  import nx_pkg::*;
#(
  parameter int unsigned N_BANKS    = 2,
  parameter int unsigned BANK_WORDS = 512,
  localparam int unsigned BW        = $clog2(BANK_WORDS),
  localparam int unsigned AW        = $clog2(N_BANKS * BANK_WORDS)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     test_en_i,
  input  obi_req_t ext_req_i,
  output obi_rsp_t ext_rsp_o,
  input  obi_req_t mc_req_i,
  output obi_rsp_t mc_rsp_o
);
  logic [AW-1:0]              ext_w, mc_w;
  logic [N_BANKS-1:0]         ce, we, ext_sel, mc_sel;
  logic [N_BANKS-1:0][BW-1:0] baddr;
  logic [N_BANKS-1:0][31:0]   bwdata, brdata;
  logic [N_BANKS-1:0][3:0]    bbe;
  logic                       ext_gnt, ext_rv, mc_rv, bank_clk;
  logic [$clog2(N_BANKS)-1:0] ext_bank_q, mc_bank_q, ext_bank, mc_bank;

  assign ext_w    = ext_req_i.addr[AW+1:2];
  assign mc_w     = mc_req_i.addr[AW+1:2];
  assign ext_bank = ext_w[AW-1:BW];
  assign mc_bank  = mc_w[AW-1:BW];
  assign ext_gnt  = ext_req_i.req && !(mc_req_i.req && mc_bank == ext_bank);

  always_comb begin
    ce = '0; we = '0; baddr = '0; bwdata = '0; bbe = '0;
    for (int b = 0; b < N_BANKS; b++) begin
      ext_sel[b] = ext_gnt && int'(ext_bank) == b;
      mc_sel[b]  = mc_req_i.req && int'(mc_bank) == b;
      if (mc_sel[b]) begin
        ce[b] = 1'b1; we[b] = mc_req_i.we; baddr[b] = mc_w[BW-1:0];
        bwdata[b] = mc_req_i.wdata; bbe[b] = mc_req_i.be;
      end else if (ext_sel[b]) begin
        ce[b] = 1'b1; we[b] = ext_req_i.we; baddr[b] = ext_w[BW-1:0];
        bwdata[b] = ext_req_i.wdata; bbe[b] = ext_req_i.be;
      end
    end
  end

  nx_clock_gate u_cg (.clk_i, .en_i(|ce), .test_en_i, .clk_o(bank_clk));

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    nx_ctx_bank #(.DEPTH(BANK_WORDS), .WIDTH(32)) u_bank (
      .clk_i(bank_clk), .ce_i(ce[b]), .we_i(we[b]), .be_i(bbe[b]), .addr_i(baddr[b]),
      .wdata_i(bwdata[b]), .rdata_o(brdata[b])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_rv <= 1'b0; mc_rv <= 1'b0; ext_bank_q <= '0; mc_bank_q <= '0;
    end else begin
      ext_rv <= ext_gnt;
      mc_rv  <= mc_req_i.req;
      if (ext_gnt)      ext_bank_q <= ext_bank;
      if (mc_req_i.req) mc_bank_q  <= mc_bank;
    end
  end

  assign ext_rsp_o = '{gnt: ext_gnt, rvalid: ext_rv, rdata: brdata[ext_bank_q]};
  assign mc_rsp_o  = '{gnt: mc_req_i.req, rvalid: mc_rv, rdata: brdata[mc_bank_q]};
endmodule
