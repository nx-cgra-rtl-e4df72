// tb_nx_gemm: the gemm workload at its published size on the full-size subsystem.
//
// C = A x B with A int8 [32 x 64] and B int8 [64 x 32]; every result is requantised to int8 as
// sat8((dot + bias) >>> shift), as an int8 transformer layer would. The shared memory holds A
// row by row and B transposed (row j of Bt is column j of B), four int8 values per word, so a
// 64-long dot product is 16 MAC4 operations. One context computes four outputs, one per array
// column: MOB0c streams a row of A, MOB1c streams a row of Bt, PE2c forwards the Bt words
// north, PE1c runs MAC4 on the two streams and the requantisation, and MOB0c stores the
// result. The host then rewrites the changed constants (row addresses and output address) in
// the context memory and starts the next context, 256 runs in all. The memory model refuses
// requests at random and has 8 word-interleaved banks, so runs stall. Every output is
// compared with a reference computed here; the test also reports the cycles per run.
// The data layout (Bt) and the one-output-per-column mapping are this testbench's choice; a
// scheduling compiler would use more of the 16 PEs.
module tb_nx_gemm;
  import nx_pkg::*;

  localparam int M = 32, K = 64, N = 32;
  localparam int KW = K / 4;                       // words per row
  localparam int A_W = 'h000, BT_W = 'h200, C_W = 'h400;
  localparam int BIAS = -700, SHIFT = 6;

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

  nx_l1_model #(.N_PORTS(N_MOBS), .N_BANKS(8), .WORDS(4096), .STALL_ONE_IN(6)) u_l1 (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mem_req), .rsp_o(mem_rsp)
  );

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- context image
  logic [31:0] ctx [$];
  logic [31:0] old [$];
  logic [31:0] prog [$];
  logic [31:0] consts [$];

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
    prog.delete();
    consts.delete();
  endtask

  // context computing output o = 4*run + c in column c: row i = o / N of A, column j = o % N
  task automatic build_context(int run);
    ctx.delete();
    for (int c = 0; c < 4; c++) begin
      automatic int o = 4 * run + c;
      automatic int i = o / N, j = o % N;
      // MOB0c: stream row i of A, then store the result coming from PE1c (south)
      consts = '{32'((A_W + i * KW) * 4), 32'd4, 32'((C_W + o) * 4)};
      prog = '{I(OP_NOP), I(OP_LD, SRC_CRF, 0)};
      for (int k = 1; k < KW; k++) prog.push_back(I(OP_LDP, SRC_CRF, 1));
      while (prog.size() < KW + 6) prog.push_back(I(OP_NOP));
      prog.push_back(I(OP_ST, SRC_CRF, 2, SRC_S, 0));
      prog.push_back(I(OP_EXIT));
      emit_core(4 + c);
      // PE1c: 16 MAC4, bias, shift, saturate
      consts = '{32'(BIAS), 32'(SHIFT)};
      prog = '{I(OP_MOV, SRC_ZERO, 0, SRC_ZERO, 0, 0, 1), I(OP_NOP), I(OP_NOP)};
      for (int k = 0; k < KW; k++) prog.push_back(I(OP_MAC4, SRC_N, 0, SRC_S, 0, 0, 1));
      prog.push_back(I(OP_ADD, SRC_TRF, 0, SRC_CRF, 0, 0, 1));
      prog.push_back(I(OP_SRA, SRC_TRF, 0, SRC_CRF, 1, 0, 1));
      prog.push_back(I(OP_SAT8, SRC_TRF, 0));
      prog.push_back(I(OP_EXIT));
      emit_core(8 + c);
      // PE2c: forward the Bt stream from MOB1c (south) to PE1c
      prog = '{I(OP_NOP), I(OP_NOP)};
      for (int k = 0; k < KW; k++) prog.push_back(I(OP_MOV, SRC_S));
      prog.push_back(I(OP_EXIT));
      emit_core(12 + c);
      // MOB1c: stream row j of Bt
      consts = '{32'((BT_W + j * KW) * 4), 32'd4};
      prog = '{I(OP_LD, SRC_CRF, 0)};
      for (int k = 1; k < KW; k++) prog.push_back(I(OP_LDP, SRC_CRF, 1));
      prog.push_back(I(OP_EXIT));
      emit_core(16 + c);
    end
    ctx.push_back(32'd0);
  endtask

  // ---------------------------------------------------------------- matrices and reference
  logic signed [7:0] a [M][K];
  logic signed [7:0] b [K][N];

  function automatic int ref_c(int i, int j);
    int acc = 0;
    for (int k = 0; k < K; k++) acc += int'(a[i][k]) * int'(b[k][j]);
    acc = (acc + BIAS) >>> SHIFT;
    if (acc > 127) acc = 127;
    if (acc < -128) acc = -128;
    return acc;
  endfunction

  // ---------------------------------------------------------------- bus tasks
  task automatic ctx_write(int word, logic [31:0] data);
    @(negedge clk);
    ctx_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'(word * 4), wdata: data};
    do @(posedge clk); while (!ctx_rsp.gnt);
    @(negedge clk);
    ctx_req = '0;
  endtask

  task automatic apb_write(logic [11:0] addr, logic [31:0] d);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b1, paddr: addr, pwdata: d};
    @(negedge clk);
    apb_req.penable = 1'b1;
    @(negedge clk);
    apb_req = '0;
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, total_cycles = 0, max_cycles = 0, rewrites = 0, wrong = 0;
    ctx_req = '0;
    apb_req = '0;
    for (int i = 0; i < 4096; i++) u_l1.mem[i] = $urandom;
    for (int i = 0; i < M; i++)
      for (int k = 0; k < K; k++) begin
        a[i][k] = 8'($urandom);
        u_l1.mem[A_W + i * KW + k / 4][(k % 4) * 8 +: 8] = a[i][k];
      end
    for (int k = 0; k < K; k++)
      for (int j = 0; j < N; j++) begin
        b[k][j] = 8'($urandom);
        u_l1.mem[BT_W + j * KW + k / 4][(k % 4) * 8 +: 8] = b[k][j];
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    apb_write(MM_CTX_BASE, 32'd0);

    for (int run = 0; run < M * N / 4; run++) begin
      build_context(run);
      foreach (ctx[w])
        if (run == 0 || ctx[w] !== old[w]) begin
          ctx_write(w, ctx[w]);
          rewrites++;
        end
      old = ctx;
      apb_write(MM_CTRL, 32'd3);       // clear the previous flag and start
      repeat (2) @(negedge clk);       // the flag is cleared by now
      cycles = 2;
      while (!irq) begin
        @(negedge clk);
        cycles++;
      end
      total_cycles += cycles;
      if (cycles > max_cycles) max_cycles = cycles;
    end

    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (u_l1.mem[C_W + i * N + j] !== 32'(ref_c(i, j))) begin
          failures++;
          if (wrong++ < 8)
            $display("FAIL: C[%0d][%0d] = %0d, expected %0d", i, j,
                     $signed(u_l1.mem[C_W + i * N + j]), ref_c(i, j));
        end
      end
    checks++;
    if (u_l1.refusals == 0) begin
      failures++;
      $display("FAIL: memory never refused a request");
    end
    $display("gemm %0dx%0dx%0d: %0d contexts of %0d words, %0d words rewritten, %0d cycles (max %0d per context), %0d refusals",
             M, K, N, M * N / 4, ctx.size(), rewrites, total_cycles, max_cycles, u_l1.refusals);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
