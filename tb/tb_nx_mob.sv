// tb_nx_mob: loads random micro-code into a MOB and runs it against a one-port memory model
// that refuses requests at random, with a random array hold from other cores. An
// instruction-level reference model executes one step per cycle in which the hold is low:
// loads read memory in program order and deliver into the output register (and the constant
// RF if requested) at the end of the next step, with priority over a MOV; stores write in
// program order; LDP/STP use the previous address plus A. Output, program counter, constant RF
// and status are compared after every edge, the memory at the end.
module tb_nx_mob;
  import nx_pkg::*;
  localparam int WORDS = 64;
  logic clk = 0, rst_n = 1'b1, start = 0, ext_hold = 0, hold, stall, cwe = 0; cfg_sel_e csel;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [4:0] cidx; logic [31:0] cd, out; logic [3:0][31:0] nbr; logic done, awake;
  obi_req_t req; obi_rsp_t rsp;
  int checks = 0, failures = 0, loads = 0, stores = 0, stalls = 0;
  nx_mob u_dut (.clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .start_i(start), .hold_i(hold),
    .stall_o(stall), .cfg_we_i(cwe), .cfg_sel_i(csel), .cfg_idx_i(cidx), .cfg_wdata_i(cd),
    .nbr_i(nbr), .out_o(out), .done_o(done), .awake_o(awake), .obi_req_o(req), .obi_rsp_i(rsp));
  nx_l1_model #(.N_PORTS(1), .N_BANKS(1), .WORDS(WORDS), .STALL_ONE_IN(3)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));
  assign hold = stall || ext_hold;
  always #5 clk = ~clk;
  always @(posedge clk) if (stall) stalls++;

  logic [31:0] irf [32], crf [16], mem [WORDS], m_out, m_prev;
  bit was_held = 0; op_e last;
  int m_pc; bit m_awake, m_done, pend, pend_we; logic [31:0] pend_d; logic [3:0] pend_rd;

  function automatic logic [31:0] src(src_e s, int i);
    case (s)
      SRC_TRF, SRC_CRF: return crf[i];
      SRC_N: return nbr[0];
      SRC_E: return nbr[1];
      SRC_S: return nbr[2];
      SRC_W: return nbr[3];
      SRC_SELF: return m_out;
      default: return 0;
    endcase
  endfunction

  task automatic step();
    instr_t in = instr_t'(irf[m_pc]);
    logic [31:0] a = src(in.sa, in.ia), b = src(in.sb, in.ib), ad;
    bit npend = 0; logic [31:0] nd; int w;
    last = in.op;
    if (in.op inside {OP_LD, OP_LDP, OP_ST, OP_STP}) begin
      ad = (in.op inside {OP_LDP, OP_STP}) ? m_prev + a : a;
      m_prev = ad;
      w = (ad >> 2) % WORDS;
      if (in.op inside {OP_ST, OP_STP}) begin mem[w] = b; stores++; end
      else begin npend = 1; nd = mem[w]; loads++; end
    end
    if (in.op == OP_MOV) begin
      m_out = a;
      if (in.we && !(pend && pend_we)) crf[in.rd] = a;   // one core write port: load wins
    end
    if (pend) begin
      m_out = pend_d;
      if (pend_we) crf[pend_rd] = pend_d;
    end
    pend = npend; pend_d = nd; pend_we = in.we; pend_rd = in.rd;
    case (in.op)
      OP_JUMP: m_pc = in.imm % 32;
      OP_CJUMP: m_pc = (a != 0) ? in.imm % 32 : m_pc + 1;
      OP_EXIT: begin m_awake = 0; m_done = 1; end
      default: m_pc++;
    endcase
  endtask

  task automatic cfg(cfg_sel_e s, int i, logic [31:0] d);
    @(negedge clk);
    cwe = 1; csel = s; cidx = 5'(i); cd = d;
    @(negedge clk);
    cwe = 0;
  endtask

  initial begin
    static op_e ops[] = '{OP_LD, OP_LDP, OP_ST, OP_STP, OP_LD, OP_LDP, OP_MOV, OP_NOP, OP_CJUMP, OP_JUMP};
    for (int i = 0; i < WORDS; i++) begin mem[i] = $urandom; u_mem.mem[i] = mem[i]; end
    m_out = 0; m_prev = 0; pend = 0;
    nbr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int prog = 0; prog < 20; prog++) begin
      ext_hold = 1;
      for (int i = 0; i < 32; i++) begin
        automatic op_e o = ops[$urandom % ops.size()];
        automatic int r = $urandom % 4;
        automatic int tgt = (i + 1 + r > 31) ? 31 : i + 1 + r;   // forward: programs end
        automatic src_e sa = (o inside {OP_LD, OP_ST, OP_LDP, OP_STP} && $urandom % 2) ? SRC_CRF
                                                                    : src_e'($urandom % 8);
        irf[i] = (i == 31) ? enc(OP_EXIT, SRC_ZERO, 0, SRC_ZERO, 0, 0, 0, 0)
                           : enc(o, sa, 4'($urandom), src_e'($urandom % 8), 4'($urandom),
                                 4'($urandom), 1'($urandom), 7'(tgt));
        cfg(CFG_IRF, i, irf[i]);
      end
      for (int i = 0; i < 16; i++) begin
        crf[i] = (i < 8) ? 32'(4 * ($urandom % WORDS)) : $urandom;
        cfg(CFG_CRF, i, crf[i]);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0; m_pc = 0; m_awake = 1; m_done = 0;
      for (int cyc = 0; cyc < 2000 && (m_awake || pend || awake || cyc < 40); cyc++) begin
        // neighbours are frozen by the hold like every other core
        if (!was_held) nbr = {$urandom, $urandom, $urandom, $urandom};
        ext_hold = ($urandom % 6 == 0);
        #3;
        was_held = hold;   // sampled before the edge
        @(posedge clk);
        if (!was_held && (m_awake || pend)) begin
          if (m_awake) step();
          else begin   // a load retired just before EXIT still delivers
            m_out = pend_d; if (pend_we) crf[pend_rd] = pend_d; pend = 0;
          end
        end
        @(negedge clk);
        checks++;
        if (out !== m_out || awake !== m_awake || done !== m_done ||
            (m_awake && u_dut.pc !== 5'(m_pc)) || u_dut.u_crf.regs[3] !== crf[3]) begin
          failures++;
          if (failures < 10) $display("FAIL prog %0d cyc %0d: out %h exp %h pc %0d exp %0d %s",
                                      prog, cyc, out, m_out, u_dut.pc, m_pc, last.name());
        end
      end
      checks++;
      if (awake || m_awake) begin failures++; $display("FAIL: program %0d did not end", prog); end
    end
    ext_hold = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      checks++;
      if (u_mem.mem[i] !== mem[i]) begin failures++; $display("FAIL mem[%0d]", i); end
    end
    checks++;
    if (stalls == 0 || loads == 0 || stores == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
