// tb_nx_pe: loads random micro-code and constants into a PE through its configuration port,
// starts it and runs it with random neighbour values and a random array hold, comparing the
// output register, the program counter and the done/awake status with an instruction-level
// reference model after every clock edge. Programs mix all operand sources, the ALU32, ALU8,
// MUL and DIV operators, temporary-register writes, JUMP, CJUMP and a final EXIT. Each
// program is run twice (restart) to check that start resets the program counter.
module tb_nx_pe;
  import nx_pkg::*;
  logic clk = 0, rst_n = 1'b1, start = 0, hold = 0, cwe = 0; cfg_sel_e csel; logic [4:0] cidx;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [31:0] cd, out; logic [3:0][31:0] nbr; logic done, awake;
  int checks = 0, failures = 0, executed = 0, taken = 0;
  nx_pe u_dut (.clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .start_i(start), .hold_i(hold),
    .cfg_we_i(cwe), .cfg_sel_i(csel), .cfg_idx_i(cidx), .cfg_wdata_i(cd), .nbr_i(nbr),
    .out_o(out), .done_o(done), .awake_o(awake));
  always #5 clk = ~clk;

  logic [31:0] irf [32], crf [16], trf [8], m_out; int m_pc; bit m_awake, m_done; op_e last;

  function automatic logic [31:0] src(src_e s, int i);
    case (s)
      SRC_TRF: return trf[i % 8];
      SRC_CRF: return crf[i];
      SRC_N: return nbr[0];
      SRC_E: return nbr[1];
      SRC_S: return nbr[2];
      SRC_W: return nbr[3];
      SRC_SELF: return m_out;
      default: return 0;
    endcase
  endfunction

  function automatic int s8(logic [31:0] x, int l);
    int v = int'((x >> (8 * l)) & 255);
    return v > 127 ? v - 256 : v;
  endfunction

  task automatic step();
    instr_t in = instr_t'(irf[m_pc]);
    logic [31:0] a = src(in.sa, in.ia), b = src(in.sb, in.ib), c = trf[in.rd % 8], r;
    bit wr = 1;
    longint p;
    int acc;
    executed++;
    last = in.op;
    case (in.op)
      OP_MOV: r = a;
      OP_ADD: r = a + b;
      OP_SUB: r = a - b;
      OP_XOR: r = a ^ b;
      OP_AND: r = a & b;
      OP_SLL: r = a << (b % 32);
      OP_SRA: begin p = longint'(int'(a)) >>> (b % 32); r = p[31:0]; end
      OP_SLT: r = 32'(int'(a) < int'(b));
      OP_SEL: r = (c != 0) ? a : b;
      OP_MERGE: r = (a & ~c) | (b & c);
      OP_MUL32: begin p = longint'(int'(a)) * longint'(int'(b)); r = p[31:0]; end
      OP_MUL16U: r = (a & 32'hFFFF) * (b & 32'hFFFF);
      OP_MUL8U: r = (a & 255) * (b & 255);
      OP_MAC4: begin
        acc = int'(c);
        for (int l = 0; l < 4; l++) acc += s8(a, l) * s8(b, l);
        r = acc;
      end
      OP_SAT8: r = (int'(a) > 127) ? 127 : (int'(a) < -128) ? -128 : a;
      OP_DIVU: r = (b == 0) ? 32'hFFFF_FFFF : a / b;
      default: wr = 0;
    endcase
    if (wr) begin
      m_out = r;
      if (in.we) trf[in.rd % 8] = r;
    end
    case (in.op)
      OP_JUMP: m_pc = in.imm % 32;
      OP_CJUMP: begin
        if (a != 0) begin m_pc = in.imm % 32; taken++; end
        else m_pc++;
      end
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
    op_e ops[] = '{OP_MOV, OP_ADD, OP_SUB, OP_XOR, OP_AND, OP_SLL, OP_SRA, OP_SLT, OP_SEL,
                   OP_MERGE, OP_MUL32, OP_MUL16U, OP_MUL8U, OP_MAC4, OP_SAT8, OP_DIVU, OP_NOP,
                   OP_CJUMP, OP_JUMP};
    for (int i = 0; i < 8; i++) trf[i] = 0;
    m_out = 0;
    nbr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int prog = 0; prog < 20; prog++) begin
      hold = 1;   // a core still running the previous program stays frozen while reloaded
      for (int i = 0; i < 32; i++) begin
        automatic op_e o = ops[$urandom % ops.size()];
        automatic int tgt = (o == OP_JUMP) ? i + 1 + $urandom % 3 : $urandom % 31;
        irf[i] = (i == 31) ? enc(OP_EXIT, SRC_ZERO, 0, SRC_ZERO, 0, 0, 0, 0)
                           : enc(o, src_e'($urandom % 8), 4'($urandom), src_e'($urandom % 8),
                                 4'($urandom), 4'($urandom % 8), 1'($urandom), 7'(tgt));
        cfg(CFG_IRF, i, irf[i]);
      end
      for (int i = 0; i < 16; i++) begin
        crf[i] = (i < 4) ? 32'(i) : $urandom;
        cfg(CFG_CRF, i, crf[i]);
      end
      for (int rep = 0; rep < 2; rep++) begin
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0; m_pc = 0; m_awake = 1; m_done = 0;
        for (int cyc = 0; cyc < 120; cyc++) begin
          nbr  = {$urandom, $urandom, $urandom, $urandom};
          hold = ($urandom % 6 == 0);
          @(posedge clk);
          if (m_awake && !hold) step();
          @(negedge clk);
          checks++;
          if (out !== m_out || awake !== m_awake || done !== m_done ||
              (m_awake && u_dut.pc !== 5'(m_pc))) begin
            failures++;
            if (failures < 10) $display("FAIL prog %0d cyc %0d: out %h exp %h pc %0d exp %0d last %s",
                                        prog, cyc, out, m_out, u_dut.pc, m_pc, last.name());
          end
        end
      end
    end
    checks++;
    if (taken == 0) begin failures++; $display("FAIL: no CJUMP taken"); end
    $display("executed %0d instructions, %0d jumps taken", executed, taken);
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
