// nx_l1_model: behavioural model of the shared L1 data memory, for simulation only.
//
// N_PORTS OBI slave ports onto one word array split into N_BANKS word-interleaved banks
// (bank = word address mod N_BANKS). Each bank serves one request per cycle; when several
// ports address the same bank, the lowest port wins and the others wait without grant.
// A port may also be refused at random (1 in STALL_ONE_IN cycles, 0 = never) to model a busy
// interconnect. rvalid and read data follow one cycle after the grant. The host side reads
// and writes the array directly through the mem variable.
module nx_l1_model
  import nx_pkg::*;
#(
  parameter int unsigned N_PORTS      = 8,
  parameter int unsigned N_BANKS      = 8,
  parameter int unsigned WORDS        = 65536,
  parameter int unsigned STALL_ONE_IN = 0
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  obi_req_t [N_PORTS-1:0]    req_i,
  output obi_rsp_t [N_PORTS-1:0]    rsp_o
);
  logic [31:0]        mem [WORDS];
  logic [N_PORTS-1:0] gnt, busy_rand, rv_q;
  logic [31:0]        rdata_q [N_PORTS];
  int unsigned        conflicts, refusals;

  always_ff @(posedge clk_i) begin
    for (int p = 0; p < N_PORTS; p++)
      busy_rand[p] <= (STALL_ONE_IN != 0) && ($urandom % STALL_ONE_IN == 0);
  end

  always_comb begin
    logic [N_BANKS-1:0] taken;
    taken = '0;
    gnt   = '0;
    for (int p = 0; p < N_PORTS; p++) begin
      automatic int unsigned b = (req_i[p].addr >> 2) % N_BANKS;
      if (req_i[p].req && !taken[b] && !busy_rand[p]) begin
        gnt[p]   = 1'b1;
        taken[b] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rv_q      <= '0;
      conflicts <= 0;
      refusals  <= 0;
    end else begin
      for (int p = 0; p < N_PORTS; p++) begin
        automatic int unsigned w = (req_i[p].addr >> 2) % WORDS;
        rv_q[p] <= gnt[p];
        if (gnt[p]) begin
          if (req_i[p].we) mem[w] <= req_i[p].wdata;
          else             rdata_q[p] <= mem[w];
        end else if (req_i[p].req) begin
          if (busy_rand[p]) refusals  <= refusals + 1;
          else              conflicts <= conflicts + 1;
        end
      end
    end
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_rsp
    assign rsp_o[p] = '{gnt: gnt[p], rvalid: rv_q[p], rdata: rdata_q[p]};
  end
endmodule
