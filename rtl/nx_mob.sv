// nx_mob: memory-operation block (MOB) of the NX-CGRA array.
//
// A MOB has the same controller, micro-code instruction RF and lockstep execution as a PE, but
// instead of arithmetic units it has a load-store unit (LSU) with an address generation unit
// (AGU) and an OBI master port to the shared memory. Its inline constant RF is also its
// working register file: the core can write it (MOV, and load data with the write bit set).
// Operations: LD (address A), LDP (previous address + A), ST (address A, data B), STP
// (previous address + A, data B), MOV (route A to the output register), JUMP, CJUMP, EXIT, NOP.
// Load data arrive in the output register, visible to the neighbours, one cycle after the
// request is granted or later if the memory is slow; the LSU then holds the whole array. If a
// load returns in the same cycle as a MOV writes the output or the same register, the load wins.
// Memory operations only, the LSU with AGU and the writable constant RF follow the published
// MOB; operations and timing are this design's choices.
module nx_mob
  import nx_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              test_en_i,
  input  logic              start_i,
  input  logic              hold_i,
  output logic              stall_o,
  input  logic              cfg_we_i,
  input  cfg_sel_e          cfg_sel_i,
  input  logic [4:0]        cfg_idx_i,
  input  logic [31:0]       cfg_wdata_i,
  input  logic [3:0][31:0]  nbr_i,
  output logic [31:0]       out_o,
  output logic              done_o,
  output logic              awake_o,
  output obi_req_t          obi_req_o,
  input  obi_rsp_t          obi_rsp_i
);
  logic              gclk, clk_en, run, exit_now, is_mem, is_prev, is_store;
  logic [PC_W-1:0]   pc;
  logic [31:0]       iword, crf_a, crf_b, op_a, op_b, addr, prev_addr;
  instr_t            ins;
  logic              ld_valid, mov_we, core_we;
  logic [31:0]       ld_data, core_wdata;
  logic [4:0]        ld_tag;
  logic [3:0]        core_waddr;

  nx_sleep_unit u_sleep (
    .clk_i, .rst_ni, .start_i, .exit_i(exit_now), .cfg_active_i(cfg_we_i),
    .awake_o, .done_o, .clk_en_o(clk_en)
  );

  nx_clock_gate u_cg (.clk_i, .en_i(clk_en), .test_en_i, .clk_o(gclk));

  nx_cfg_rf #(.DEPTH(IRF_DEPTH)) u_irf (
    .clk_i(gclk), .rst_ni,
    .cfg_we_i(cfg_we_i && cfg_sel_i == CFG_IRF), .cfg_addr_i(cfg_idx_i[PC_W-1:0]),
    .cfg_wdata_i,
    .core_we_i(1'b0), .core_waddr_i('0), .core_wdata_i('0),
    .raddr_a_i(pc), .raddr_b_i('0), .rdata_a_o(iword), .rdata_b_o()
  );

  assign ins = instr_t'(iword);

  // Load data have priority over a MOV on the core write port.
  assign mov_we     = run && ins.op == OP_MOV && ins.we;
  assign core_we    = (ld_valid && ld_tag[4]) || mov_we;
  assign core_waddr = (ld_valid && ld_tag[4]) ? ld_tag[3:0] : ins.rd;
  assign core_wdata = (ld_valid && ld_tag[4]) ? ld_data : op_a;

  nx_cfg_rf #(.DEPTH(CRF_DEPTH)) u_crf (
    .clk_i(gclk), .rst_ni,
    .cfg_we_i(cfg_we_i && cfg_sel_i == CFG_CRF), .cfg_addr_i(cfg_idx_i[3:0]),
    .cfg_wdata_i,
    .core_we_i(core_we), .core_waddr_i(core_waddr), .core_wdata_i(core_wdata),
    .raddr_a_i(ins.ia), .raddr_b_i(ins.ib), .rdata_a_o(crf_a), .rdata_b_o(crf_b)
  );

  function automatic logic [31:0] pick(src_e s, logic [31:0] c, logic [3:0][31:0] n,
                                       logic [31:0] self);
    unique case (s)
      SRC_TRF, SRC_CRF: return c;
      SRC_N:    return n[0];
      SRC_E:    return n[1];
      SRC_S:    return n[2];
      SRC_W:    return n[3];
      SRC_SELF: return self;
      default:  return 32'd0;
    endcase
  endfunction

  assign op_a = pick(ins.sa, crf_a, nbr_i, out_o);
  assign op_b = pick(ins.sb, crf_b, nbr_i, out_o);

  assign run      = awake_o && !hold_i && !start_i;
  assign exit_now = run && ins.op == OP_EXIT;
  assign is_mem   = ins.op inside {OP_LD, OP_LDP, OP_ST, OP_STP};
  assign is_prev  = ins.op inside {OP_LDP, OP_STP};
  assign is_store = ins.op inside {OP_ST, OP_STP};

  nx_agu u_agu (
    .clk_i(gclk), .rst_ni, .use_prev_i(is_prev), .offset_i(op_a),
    .update_i(obi_req_o.req && obi_rsp_i.gnt), .addr_o(addr), .prev_o(prev_addr)
  );

  nx_lsu #(.TAG_W(5)) u_lsu (
    .clk_i(gclk), .rst_ni,
    .issue_i(awake_o && !start_i && is_mem), .we_i(is_store), .addr_i(addr), .wdata_i(op_b),
    .tag_i({ins.we, ins.rd}), .hold_i,
    .stall_o, .load_valid_o(ld_valid), .load_data_o(ld_data), .load_tag_o(ld_tag),
    .obi_req_o, .obi_rsp_i
  );

  always_ff @(posedge gclk or negedge rst_ni) begin
    if (!rst_ni) begin
      pc    <= '0;
      out_o <= '0;
    end else begin
      if (ld_valid)                    out_o <= ld_data;
      else if (run && ins.op == OP_MOV) out_o <= op_a;
      if (start_i) begin
        pc <= '0;
      end else if (run) begin
        unique case (ins.op)
          OP_JUMP:  pc <= ins.imm[PC_W-1:0];
          OP_CJUMP: pc <= (op_a != 32'd0) ? ins.imm[PC_W-1:0] : pc + 1'b1;
          OP_EXIT:  pc <= pc;
          default:  pc <= pc + 1'b1;
        endcase
      end
    end
  end
endmodule
