// tb_nx_cgra: end-to-end test of the NX-CGRA subsystem at its default (published) size.
//
// The host side loads a context for 23 of the 24 cores into the context memory over OBI, sets
// CTX_BASE and triggers execution over APB, waits for the end-of-execution interrupt and checks
// the results in the shared-memory model against values computed here in plain arithmetic.
// Per column c of the array the program is:
//   MOB0c and MOB1c   stream the int8 row A[c] (32 values) and the vector x from memory,
//   PE2c              forwards x from MOB1c to PE1c,
//   PE1c              accumulates four int8 products per cycle (MAC4), adds a bias, shifts and
//                     saturates to int8; MOB0c stores y[c],
//   PE0c              runs a chain of 32-bit MUL/DIV/MUL16/XOR/REMU/ADD, stored by MOB0c,
//   PE3c              sums n..1 in a loop closed by CJUMP; MOB1c waits for it by spinning on
//                     a CJUMP over PE3c's output (a barrier between cores) and stores the sum.
// PE03 gets no context, so the end of execution must not wait for it. The memory model
// refuses requests at random and all four A streams hit the same bank, so the array stalls.
// The test counts each mechanism (stall, bank conflict, CJUMP barrier, core sleep, array
// clock gating, context fetch, end of execution) and fails if one never happened.
module tb_nx_cgra;
  import nx_pkg::*;

  localparam int W = 8;   // words per A row / x vector

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  always #5 clk = ~clk;

  obi_req_t              ctx_req;
  obi_rsp_t              ctx_rsp;
  apb_req_t              apb_req;
  apb_rsp_t              apb_rsp;
  logic                  irq;
  obi_req_t [N_MOBS-1:0] mem_req;
  obi_rsp_t [N_MOBS-1:0] mem_rsp;

  nx_cgra u_dut (
    .clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .ctx_req_i(ctx_req), .ctx_rsp_o(ctx_rsp),
    .apb_req_i(apb_req), .apb_rsp_o(apb_rsp), .irq_o(irq), .mem_req_o(mem_req),
    .mem_rsp_i(mem_rsp)
  );

  nx_l1_model #(.N_PORTS(N_MOBS), .N_BANKS(8), .WORDS(4096), .STALL_ONE_IN(5)) u_l1 (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mem_req), .rsp_o(mem_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- context image
  logic [31:0] ctx [$];
  logic [31:0] prog [$];
  logic [31:0] consts [$];
  int n_data = 0;

  function automatic logic [31:0] I(op_e op, src_e sa = SRC_ZERO, int ia = 0,
                                    src_e sb = SRC_ZERO, int ib = 0, int rd = 0,
                                    bit we = 0, int imm = 0);
    return enc(op, sa, 4'(ia), sb, 4'(ib), 4'(rd), we, 7'(imm));
  endfunction

  task automatic emit_core(int core);
    ctx.push_back(ctx_header(core, CFG_IRF, 0, prog.size()));
    foreach (prog[i]) ctx.push_back(prog[i]);
    if (consts.size() > 0) begin
      ctx.push_back(ctx_header(core, CFG_CRF, 0, consts.size()));
      foreach (consts[i]) ctx.push_back(consts[i]);
    end
    n_data += prog.size() + consts.size();
    prog.delete();
    consts.delete();
  endtask

  // data layout (word addresses in the shared memory)
  localparam int A_W = 'h100, X_W = 'h200, Y_W = 'h300, CH_W = 'h310, LP_W = 'h320;
  int bias [4], shamt [4], x0 [4], mulc [4], divc [4], nloop [4];

  task automatic build_context();
    for (int c = 0; c < 4; c++) begin
      bias[c] = 1000 * (c - 2); shamt[c] = 2 + c;
      x0[c] = 123457 * (c + 1); mulc[c] = -37 - c; divc[c] = 7 + 2 * c; nloop[c] = 3 + c;
      // PE0c: 32-bit chain (none for PE03)
      if (c != 3) begin
        consts = '{32'(x0[c]), 32'(mulc[c]), 32'(divc[c]), 32'hFF00_FF00};
        prog = '{I(OP_MOV, SRC_CRF, 0, SRC_ZERO, 0, 0, 1),
                 I(OP_MUL32, SRC_TRF, 0, SRC_CRF, 1, 0, 1),
                 I(OP_DIV, SRC_TRF, 0, SRC_CRF, 2, 0, 1),
                 I(OP_MUL16U, SRC_TRF, 0, SRC_CRF, 1, 0, 1),
                 I(OP_XOR, SRC_TRF, 0, SRC_CRF, 3, 0, 1),
                 I(OP_REMU, SRC_TRF, 0, SRC_CRF, 2, 1, 1),
                 I(OP_ADD, SRC_TRF, 0, SRC_TRF, 1, 0, 1),
                 I(OP_EXIT)};
        emit_core(c);
      end
      // MOB0c: A stream, then store y[c] and the chain result
      consts = '{32'((A_W + c * W) * 4), 32'd4, 32'((Y_W + c) * 4), 32'((CH_W + c) * 4)};
      prog = '{I(OP_NOP), I(OP_LD, SRC_CRF, 0)};
      for (int k = 1; k < W; k++) prog.push_back(I(OP_LDP, SRC_CRF, 1));
      while (prog.size() < 14) prog.push_back(I(OP_NOP));
      prog.push_back(I(OP_ST, SRC_CRF, 2, SRC_S, 0));
      prog.push_back(I(OP_ST, SRC_CRF, 3, SRC_N, 0));
      prog.push_back(I(OP_EXIT));
      emit_core(4 + c);
      // PE1c: dot product, bias, shift, saturate
      consts = '{32'(bias[c]), 32'(shamt[c])};
      prog = '{I(OP_MOV, SRC_ZERO, 0, SRC_ZERO, 0, 0, 1), I(OP_NOP), I(OP_NOP)};
      for (int k = 0; k < W; k++) prog.push_back(I(OP_MAC4, SRC_N, 0, SRC_S, 0, 0, 1));
      prog.push_back(I(OP_ADD, SRC_TRF, 0, SRC_CRF, 0, 0, 1));
      prog.push_back(I(OP_SRA, SRC_TRF, 0, SRC_CRF, 1, 0, 1));
      prog.push_back(I(OP_SAT8, SRC_TRF, 0));
      prog.push_back(I(OP_EXIT));
      emit_core(8 + c);
      // PE2c: forward x
      prog = '{I(OP_NOP), I(OP_NOP)};
      for (int k = 0; k < W; k++) prog.push_back(I(OP_MOV, SRC_S));
      prog.push_back(I(OP_EXIT));
      emit_core(12 + c);
      // MOB1c: x stream, barrier on PE3c, store the loop sum
      consts = '{32'(X_W * 4), 32'd4, 32'((LP_W + c) * 4)};
      prog = '{I(OP_LD, SRC_CRF, 0)};
      for (int k = 1; k < W; k++) prog.push_back(I(OP_LDP, SRC_CRF, 1));
      prog.push_back(I(OP_CJUMP, SRC_S, 0, SRC_ZERO, 0, 0, 0, W));
      prog.push_back(I(OP_NOP));
      prog.push_back(I(OP_ST, SRC_CRF, 2, SRC_S, 0));
      prog.push_back(I(OP_EXIT));
      emit_core(16 + c);
      // PE3c: sum n..1 in a loop
      consts = '{32'(nloop[c]), 32'd1};
      prog = '{I(OP_MOV, SRC_CRF, 0, SRC_ZERO, 0, 0, 1),
               I(OP_MOV, SRC_ZERO, 0, SRC_ZERO, 0, 1, 1),
               I(OP_ADD, SRC_TRF, 1, SRC_TRF, 0, 1, 1),
               I(OP_SUB, SRC_TRF, 0, SRC_CRF, 1, 0, 1),
               I(OP_CJUMP, SRC_SELF, 0, SRC_ZERO, 0, 0, 0, 2),
               I(OP_MOV, SRC_TRF, 1),
               I(OP_EXIT)};
      emit_core(20 + c);
    end
    ctx.push_back(32'd0);
  endtask

  // ---------------------------------------------------------------- reference model
  function automatic int ref_dot(int c);
    int acc = 0;
    for (int k = 0; k < W; k++)
      for (int l = 0; l < 4; l++)
        acc += int'($signed(u_l1.mem[A_W + c * W + k][l*8 +: 8])) *
               int'($signed(u_l1.mem[X_W + k][l*8 +: 8]));
    acc = (acc + bias[c]) >>> shamt[c];
    if (acc > 127) acc = 127;
    if (acc < -128) acc = -128;
    return acc;
  endfunction

  function automatic logic [31:0] ref_chain(int c);
    logic [31:0] t0, t1;
    longint p;
    t0 = 32'(x0[c]);
    p  = longint'($signed(t0)) * longint'(mulc[c]);
    t0 = p[31:0];
    t0 = 32'($signed(t0) / divc[c]);
    t0 = 32'(t0[15:0]) * 32'(32'(mulc[c]) & 32'hFFFF);
    t0 = t0 ^ 32'hFF00_FF00;
    t1 = t0 % 32'(divc[c]);
    return t0 + t1;
  endfunction

  // ---------------------------------------------------------------- bus tasks
  task automatic ctx_write(int word, logic [31:0] data);
    @(negedge clk);
    ctx_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(word * 4), wdata: data};
    do @(posedge clk); while (!ctx_rsp.gnt);
    @(negedge clk);
    ctx_req = '0;
  endtask

  task automatic ctx_read(int word, output logic [31:0] data);
    @(negedge clk);
    ctx_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: 32'(word * 4), wdata: 32'd0};
    do @(posedge clk); while (!ctx_rsp.gnt);
    @(negedge clk);
    ctx_req = '0;
    data = ctx_rsp.rdata;
  endtask

  task automatic apb_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b1, paddr: a, pwdata: d};
    @(negedge clk);
    apb_req.penable = 1'b1;
    @(negedge clk);
    apb_req = '0;
  endtask

  task automatic apb_read(logic [11:0] a, output logic [31:0] d);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b0, paddr: a, pwdata: 32'd0};
    @(negedge clk);
    apb_req.penable = 1'b1;
    #1 d = apb_rsp.prdata;
    @(negedge clk);
    apb_req = '0;
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_stall = 0, n_gated = 0, n_sleep = 0, n_barrier = 0, n_cfg = 0, n_eoe = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.hold && u_dut.busy) n_stall++;
    if (!u_dut.array_clk_en) n_gated++;
    if (u_dut.busy && !u_dut.fetching && (|u_dut.done) && (|u_dut.awake)) n_sleep++;
    if (u_dut.mc_cfg_req.req) n_cfg++;
    if (u_dut.eoe) n_eoe++;
    if (u_dut.u_array.g_row[4].g_col[0].g_mob.u_mob.run &&
        u_dut.u_array.g_row[4].g_col[0].g_mob.u_mob.ins.op == OP_CJUMP &&
        u_dut.u_array.g_row[4].g_col[0].g_mob.u_mob.op_a != 0) n_barrier++;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int run_cycles, total_words;
    ctx_req = '0;
    apb_req = '0;
    for (int i = 0; i < 4096; i++) u_l1.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    build_context();
    total_words = ctx.size();
    $display("context: %0d words", total_words);
    check(total_words <= 1024, "context fits in 4 KiB");
    foreach (ctx[i]) ctx_write(i, ctx[i]);
    for (int i = 0; i < total_words; i += 37) begin
      ctx_read(i, d);
      check(d == ctx[i], $sformatf("context read-back word %0d", i));
    end

    apb_write(MM_CTX_BASE, 32'd0);
    apb_write(MM_CTRL, 32'd1);
    run_cycles = 0;
    while (!irq) begin
      @(posedge clk);
      run_cycles++;
    end
    $display("run: %0d cycles from trigger to end of execution, %0d stall cycles",
             run_cycles, n_stall);

    for (int c = 0; c < 4; c++) begin
      check(u_l1.mem[Y_W + c] == 32'(ref_dot(c)),
            $sformatf("y[%0d] = %0d, expected %0d", c, $signed(u_l1.mem[Y_W + c]), ref_dot(c)));
      check(u_l1.mem[CH_W + c] == (c == 3 ? 32'd0 : ref_chain(c)),
            $sformatf("chain[%0d] = %h", c, u_l1.mem[CH_W + c]));
      check(u_l1.mem[LP_W + c] == 32'(nloop[c] * (nloop[c] + 1) / 2),
            $sformatf("loop sum[%0d] = %0d", c, u_l1.mem[LP_W + c]));
    end

    apb_read(MM_STATUS, d);
    check(d[1:0] == 2'b10, $sformatf("STATUS done, not busy: %h", d));
    apb_read(MM_CORES, d);
    check(d == 32'h00FF_FFF7, $sformatf("CORES %h", d));
    apb_read(MM_DONE, d);
    check((d & 32'h00FF_FFF7) == 32'h00FF_FFF7, $sformatf("DONE %h", d));
    apb_read(MM_CYCLES, d);
    check(d > 0 && d < run_cycles, $sformatf("CYCLES %0d", d));
    apb_write(MM_CTRL, 32'd2);
    repeat (2) @(posedge clk);
    check(!irq, "done flag cleared");

    check(n_stall > 0, "array stalled on memory");
    check(u_l1.conflicts > 0, "bank conflicts happened");
    check(n_barrier > 0, "CJUMP barrier waited");
    check(n_sleep > 0, "finished cores slept while others ran");
    check(n_gated > 0, "array clock gated while idle");
    check(n_cfg == n_data, $sformatf("context words distributed: %0d of %0d", n_cfg, n_data));
    check(n_eoe == 1, $sformatf("one end of execution (%0d)", n_eoe));
    $display("mechanisms: stall=%0d conflicts=%0d refusals=%0d barrier=%0d sleep=%0d gated=%0d cfg=%0d eoe=%0d",
             n_stall, u_l1.conflicts, u_l1.refusals, n_barrier, n_sleep, n_gated, n_cfg, n_eoe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
