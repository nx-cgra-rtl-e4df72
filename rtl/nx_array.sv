// nx_array: the NX-Array, a 4-column x 6-row torus of 16 PEs and 8 MOBs.
//
// Rows 0, 2, 3 and 5 are PEs (PE00..PE33 in the published floor plan), rows 1 and 4 are MOBs
// (MOB00..MOB03 and MOB10..MOB13). Core index = row * 4 + column. Each core's 32-bit output
// register is wired, without switches, to the N, E, S and W inputs of its four neighbours,
// and the edges wrap around in both directions (torus): the north neighbour of PE00 is PE30
// and its west neighbour PE03, as the ghost cores around the published floor plan show.
// The array takes configuration writes on an OBI slave port (write-only, granted at once,
// answered in the next cycle) with word address {core[4:0], rf select, index[4:0]}, and has
// one OBI master port per MOB towards the shared memory. The stall requests of the eight
// LSUs are ORed into one hold that freezes every core, so the static schedule stays valid
// when memory is slow. done_o / awake_o are the per-core execution status.
// The wrap of the MOB rows to the sides and the configuration address map are this design's
// choice.
module nx_array
  import nx_pkg::*;
#(
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned ROWS = N_ROWS,
  localparam int unsigned NC  = COLS * ROWS,
  localparam int unsigned NM  = 2 * COLS
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               test_en_i,
  input  logic               start_i,
  input  obi_req_t           cfg_req_i,
  output obi_rsp_t           cfg_rsp_o,
  output obi_req_t [NM-1:0]  mem_req_o,
  input  obi_rsp_t [NM-1:0]  mem_rsp_i,
  output logic     [NC-1:0]  done_o,
  output logic     [NC-1:0]  awake_o,
  output logic               hold_o
);
  logic [NC-1:0][31:0] outs;
  logic [NM-1:0]       stalls;
  logic [NC-1:0]       cfg_we;
  logic [4:0]          cfg_core, cfg_idx;
  cfg_sel_e            cfg_sel;
  logic                cfg_pending;

  // Configuration slave: word address bits [12:2] = {core, sel, idx}.
  assign cfg_core = cfg_req_i.addr[12:8];
  assign cfg_sel  = cfg_sel_e'(cfg_req_i.addr[7]);
  assign cfg_idx  = cfg_req_i.addr[6:2];

  always_comb begin
    cfg_we = '0;
    if (cfg_req_i.req && cfg_req_i.we && int'(cfg_core) < NC) cfg_we[cfg_core] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) cfg_pending <= 1'b0;
    else         cfg_pending <= cfg_req_i.req;
  end

  assign cfg_rsp_o = '{gnt: 1'b1, rvalid: cfg_pending, rdata: 32'd0};

  assign hold_o = |stalls;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned ID = r * COLS + c;
      localparam int unsigned IN = ((r + ROWS - 1) % ROWS) * COLS + c;
      localparam int unsigned IS = ((r + 1) % ROWS) * COLS + c;
      localparam int unsigned IE = r * COLS + (c + 1) % COLS;
      localparam int unsigned IW = r * COLS + (c + COLS - 1) % COLS;
      logic [3:0][31:0] nbr;
      assign nbr = {outs[IW], outs[IS], outs[IE], outs[IN]};

      if (row_is_mob(r)) begin : g_mob
        localparam int unsigned M = (r == 1) ? c : COLS + c;
        nx_mob u_mob (
          .clk_i, .rst_ni, .test_en_i, .start_i, .hold_i(hold_o), .stall_o(stalls[M]),
          .cfg_we_i(cfg_we[ID]), .cfg_sel_i(cfg_sel), .cfg_idx_i(cfg_idx),
          .cfg_wdata_i(cfg_req_i.wdata), .nbr_i(nbr), .out_o(outs[ID]),
          .done_o(done_o[ID]), .awake_o(awake_o[ID]),
          .obi_req_o(mem_req_o[M]), .obi_rsp_i(mem_rsp_i[M])
        );
      end else begin : g_pe
        nx_pe u_pe (
          .clk_i, .rst_ni, .test_en_i, .start_i, .hold_i(hold_o),
          .cfg_we_i(cfg_we[ID]), .cfg_sel_i(cfg_sel), .cfg_idx_i(cfg_idx),
          .cfg_wdata_i(cfg_req_i.wdata), .nbr_i(nbr), .out_o(outs[ID]),
          .done_o(done_o[ID]), .awake_o(awake_o[ID])
        );
      end
    end
  end
endmodule
