// nx_cgra: the NX-CGRA subsystem, top level.
//
// A host loads the context (micro-code and constants of every core) into the 4 KiB context
// memory over the context OBI slave port, writes CTX_BASE and then CTRL.start over APB. The
// global execution controller has the memory controller copy the context into the register
// files of the 16 PEs and 8 MOBs, starts the array, and the cores run their static schedules,
// the MOBs reading and writing the shared memory over eight OBI master ports. When every core
// that got micro-code has executed EXIT, the end-of-execution management sets the done flag,
// which is also irq_o. The array clock is gated off while the subsystem is idle.
// The block structure and the interfaces (OBI to the context memory and to shared memory,
// APB to the memory map) follow the published subsystem diagram; the register map,
// context format and timing are this design's own (see the individual modules).
module nx_cgra
  import nx_pkg::*;
(
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     test_en_i,
  // host access to the context memory
  input  obi_req_t                 ctx_req_i,
  output obi_rsp_t                 ctx_rsp_o,
  // host control
  input  apb_req_t                 apb_req_i,
  output apb_rsp_t                 apb_rsp_o,
  output logic                     irq_o,
  // MOB ports to the shared memory
  output obi_req_t [N_MOBS-1:0]    mem_req_o,
  input  obi_rsp_t [N_MOBS-1:0]    mem_rsp_i
);
  obi_req_t             mc_ctx_req, mc_cfg_req;
  obi_rsp_t             mc_ctx_rsp, mc_cfg_rsp;
  logic                 trigger, clear_done, fetch_en, mc_busy, mc_done, start, eoe, eoe_flag;
  logic                 array_clk_en, array_clk, busy, fetching, hold;
  logic [9:0]           ctx_base;
  logic [N_CORES-1:0]   cores, done, awake;
  logic [31:0]          cycles;

  nx_ctx_mem u_ctx_mem (
    .clk_i, .rst_ni, .test_en_i,
    .ext_req_i(ctx_req_i), .ext_rsp_o(ctx_rsp_o), .mc_req_i(mc_ctx_req), .mc_rsp_o(mc_ctx_rsp)
  );

  nx_mem_ctrl #(.NC(N_CORES)) u_mem_ctrl (
    .clk_i, .rst_ni, .fetch_en_i(fetch_en), .ctx_base_i(ctx_base), .busy_o(mc_busy),
    .done_o(mc_done), .cores_o(cores), .ctx_req_o(mc_ctx_req), .ctx_rsp_i(mc_ctx_rsp),
    .cfg_req_o(mc_cfg_req), .cfg_rsp_i(mc_cfg_rsp)
  );

  nx_gec u_gec (
    .clk_i, .rst_ni, .trigger_i(trigger), .fetch_en_o(fetch_en), .mc_busy_i(mc_busy),
    .mc_done_i(mc_done), .start_o(start), .eoe_i(eoe), .array_clk_en_o(array_clk_en),
    .busy_o(busy), .fetching_o(fetching), .cycles_o(cycles)
  );

  nx_clock_gate u_array_cg (.clk_i, .en_i(array_clk_en), .test_en_i, .clk_o(array_clk));

  nx_array u_array (
    .clk_i(array_clk), .rst_ni, .test_en_i, .start_i(start),
    .cfg_req_i(mc_cfg_req), .cfg_rsp_o(mc_cfg_rsp), .mem_req_o, .mem_rsp_i,
    .done_o(done), .awake_o(awake), .hold_o(hold)
  );

  nx_eoe #(.N_CORES(N_CORES)) u_eoe (
    .clk_i, .rst_ni, .start_i(start), .active_i(cores), .done_i(done), .clear_i(clear_done),
    .eoe_o(eoe), .eoe_flag_o(eoe_flag)
  );

  nx_mmap #(.NC(N_CORES)) u_mmap (
    .clk_i, .rst_ni, .apb_req_i, .apb_rsp_o, .trigger_o(trigger), .clear_done_o(clear_done),
    .ctx_base_o(ctx_base), .busy_i(busy), .fetching_i(fetching), .done_flag_i(eoe_flag),
    .cores_i(cores), .core_done_i(done), .cycles_i(cycles), .irq_o
  );
endmodule
