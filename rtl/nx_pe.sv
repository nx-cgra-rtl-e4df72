// nx_pe: processing element (PE) of the NX-CGRA array.
//
// A PE executes its own statically scheduled micro-code, one 32-bit micro-instruction per
// cycle (see nx_pkg for the format). Its controller holds a program counter into the
// micro-code instruction RF, selects operands A and B from the temporary RF, the inline
// constant RF, the output registers of its four torus neighbours, its own output or zero, and
// reads operand C from temporary register rd. The result of ALU32, ALU8, MUL16/32 or DIV32 is
// written to the output register, which is what the neighbours see (one cycle latency), and
// also to temporary register rd if the write bit is set. JUMP and CJUMP (taken when A != 0)
// change the program counter; as every core runs the same static schedule in lockstep, a
// conditional jump on a value passed between cores is how cores synchronise. EXIT reports the
// core done; the core sleep unit then stops the core's clock through its clock gate until the
// next start. While hold_i (array-wide memory stall) is high nothing changes.
// The set of units, the three RFs and the routing to neighbours follow the published PE;
// the instruction format, single-cycle units and lockstep stall are this design's choices.
module nx_pe
  import nx_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              test_en_i,
  input  logic              start_i,
  input  logic              hold_i,
  // context distribution from the memory controller
  input  logic              cfg_we_i,
  input  cfg_sel_e          cfg_sel_i,
  input  logic [4:0]        cfg_idx_i,
  input  logic [31:0]       cfg_wdata_i,
  // torus links: output registers of the N, E, S, W neighbours
  input  logic [3:0][31:0]  nbr_i,
  output logic [31:0]       out_o,
  output logic              done_o,
  output logic              awake_o
);
  logic              gclk, clk_en, run, exit_now;
  logic [PC_W-1:0]   pc;
  logic [31:0]       iword, crf_a, crf_b, trf_a, trf_b, trf_c, op_a, op_b;
  logic [31:0]       r_alu32, r_alu8, r_mul, r_div, result;
  instr_t            ins;
  logic              writes_out;

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

  nx_cfg_rf #(.DEPTH(CRF_DEPTH)) u_crf (
    .clk_i(gclk), .rst_ni,
    .cfg_we_i(cfg_we_i && cfg_sel_i == CFG_CRF), .cfg_addr_i(cfg_idx_i[3:0]),
    .cfg_wdata_i,
    .core_we_i(1'b0), .core_waddr_i('0), .core_wdata_i('0),
    .raddr_a_i(ins.ia), .raddr_b_i(ins.ib), .rdata_a_o(crf_a), .rdata_b_o(crf_b)
  );

  nx_trf #(.DEPTH(TRF_DEPTH)) u_trf (
    .clk_i(gclk), .rst_ni,
    .raddr_a_i(ins.ia[2:0]), .raddr_b_i(ins.ib[2:0]), .raddr_c_i(ins.rd[2:0]),
    .rdata_a_o(trf_a), .rdata_b_o(trf_b), .rdata_c_o(trf_c),
    .we_i(run && ins.we && writes_out), .waddr_i(ins.rd[2:0]), .wdata_i(result)
  );

  function automatic logic [31:0] pick(src_e s, logic [31:0] t, logic [31:0] c,
                                       logic [3:0][31:0] n, logic [31:0] self);
    unique case (s)
      SRC_TRF:  return t;
      SRC_CRF:  return c;
      SRC_N:    return n[0];
      SRC_E:    return n[1];
      SRC_S:    return n[2];
      SRC_W:    return n[3];
      SRC_SELF: return self;
      default:  return 32'd0;
    endcase
  endfunction

  assign op_a = pick(ins.sa, trf_a, crf_a, nbr_i, out_o);
  assign op_b = pick(ins.sb, trf_b, crf_b, nbr_i, out_o);

  nx_alu32 u_alu32 (.op_i(ins.op), .a_i(op_a), .b_i(op_b), .c_i(trf_c), .lane_i(ins.imm[1:0]),
                    .rd_o(r_alu32));
  nx_alu8  u_alu8  (.op_i(ins.op), .a_i(op_a), .b_i(op_b), .c_i(trf_c), .rd_o(r_alu8));
  nx_mul   u_mul   (.op_i(ins.op), .a_i(op_a), .b_i(op_b), .rd_o(r_mul));
  nx_div32 u_div   (.op_i(ins.op), .a_i(op_a), .b_i(op_b), .rd_o(r_div));

  // Result multiplexer (the OUT mux of the PE diagram).
  always_comb begin
    writes_out = 1'b1;
    unique case (ins.op)
      OP_MOV, OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_SRA, OP_SLT, OP_SLTU,
      OP_SEQ, OP_MERGE, OP_SEL, OP_BEXT, OP_ADDC:      result = r_alu32;
      OP_MUL8U, OP_MAC4, OP_SAT8, OP_DIV8:             result = r_alu8;
      OP_MUL16U, OP_MUL32:                             result = r_mul;
      OP_DIV, OP_DIVU, OP_REM, OP_REMU:                result = r_div;
      default: begin
        result     = 32'd0;
        writes_out = 1'b0;
      end
    endcase
  end

  assign run      = awake_o && !hold_i && !start_i;
  assign exit_now = run && ins.op == OP_EXIT;

  always_ff @(posedge gclk or negedge rst_ni) begin
    if (!rst_ni) begin
      pc    <= '0;
      out_o <= '0;
    end else if (start_i) begin
      pc    <= '0;
    end else if (run) begin
      if (writes_out) out_o <= result;
      unique case (ins.op)
        OP_JUMP:  pc <= ins.imm[PC_W-1:0];
        OP_CJUMP: pc <= (op_a != 32'd0) ? ins.imm[PC_W-1:0] : pc + 1'b1;
        OP_EXIT:  pc <= pc;
        default:  pc <= pc + 1'b1;
      endcase
    end
  end
endmodule
