// tb_nx_quant: the quant workload at its published size on the full-size subsystem.
//
// 64 int16 inputs are requantised to int8 with one int32 scale: y = sat8((x * scale) >>> 16).
// There is no 16-bit signed multiply, so the product uses the 32-bit signed multiplier, as
// a compiler would pick the wider operator. The inputs sit in shared memory one per word
// (sign-extended). Four lanes handle 16 inputs each, as a four-stage pipeline, one element
// per cycle, that runs along a row of the torus and back to a MOB:
//   lane 0: MOB(1,0) load -> PE(2,0) -> PE(2,1) -> PE(2,2) -> MOB(1,2) store
//   lane 1: MOB(4,0) load -> PE(3,0) -> PE(3,1) -> PE(3,2) -> MOB(4,2) store
//   lane 2: MOB(1,1) load -> PE(0,1) -> PE(0,2) -> PE(0,3) -> MOB(1,3) store
//   lane 3: MOB(4,1) load -> PE(5,1) -> PE(5,2) -> PE(5,3) -> MOB(4,3) store
// with (row, column) positions; the three PEs run MUL32 (x * scale), SRA (>>> 16) and SAT8.
// Each stage starts one step after the one above it, so the whole kernel is one context of
// straight-line micro-code. The memory refuses requests at random, so the pipeline stalls and
// must still line up. Outputs are compared with a reference computed here, and the run's
// cycle count is reported. The memory layout and mapping are this testbench's choice.
module tb_nx_quant;
  import nx_pkg::*;

  localparam int NX = 64, PER_COL = NX / 4, SHIFT = 16;
  localparam int X_W = 'h100, Y_W = 'h200;

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

  nx_l1_model #(.N_PORTS(N_MOBS), .N_BANKS(8), .WORDS(4096), .STALL_ONE_IN(4)) u_l1 (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mem_req), .rsp_o(mem_rsp)
  );

  int checks = 0, failures = 0;

  logic [31:0] ctx [$];
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

  // straight-line stage: `lead` NOPs, then `n` copies of `ins`, then EXIT
  task automatic stage(int lead, logic [31:0] first, logic [31:0] rest, int n);
    prog.delete();
    repeat (lead) prog.push_back(I(OP_NOP));
    prog.push_back(first);
    repeat (n - 1) prog.push_back(rest);
    prog.push_back(I(OP_EXIT));
  endtask

  int scale;

  // per lane: loader MOB, the three PEs with the side each reads from, storing MOB and its side
  typedef struct {int ld; int mul; src_e mul_s; int sra; int sat; int st; src_e st_s;} lane_t;
  lane_t lanes [4] = '{'{4, 8, SRC_N, 9, 10, 6, SRC_S}, '{16, 12, SRC_S, 13, 14, 18, SRC_N},
                       '{5, 1, SRC_S, 2, 3, 7, SRC_N}, '{17, 21, SRC_N, 22, 23, 19, SRC_S}};

  task automatic build_context();
    foreach (lanes[l]) begin
      consts = '{32'((X_W + l * PER_COL) * 4), 32'd4};
      stage(0, I(OP_LD, SRC_CRF, 0), I(OP_LDP, SRC_CRF, 1), PER_COL);
      emit_core(lanes[l].ld);
      consts = '{32'(scale)};
      stage(2, I(OP_MUL32, lanes[l].mul_s, 0, SRC_CRF, 0),
               I(OP_MUL32, lanes[l].mul_s, 0, SRC_CRF, 0), PER_COL);
      emit_core(lanes[l].mul);
      consts = '{32'(SHIFT)};
      stage(3, I(OP_SRA, SRC_W, 0, SRC_CRF, 0), I(OP_SRA, SRC_W, 0, SRC_CRF, 0), PER_COL);
      emit_core(lanes[l].sra);
      stage(4, I(OP_SAT8, SRC_W), I(OP_SAT8, SRC_W), PER_COL);
      emit_core(lanes[l].sat);
      consts = '{32'((Y_W + l * PER_COL) * 4), 32'd4};
      stage(5, I(OP_ST, SRC_CRF, 0, lanes[l].st_s, 0), I(OP_STP, SRC_CRF, 1, lanes[l].st_s, 0),
            PER_COL);
      emit_core(lanes[l].st);
    end
    ctx.push_back(32'd0);
  endtask

  function automatic int ref_y(int k);
    longint p = longint'($signed(u_l1.mem[X_W + k])) * longint'(scale);
    int v = int'(p[31:0]) >>> SHIFT;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

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

  task automatic apb_read(logic [11:0] addr, output logic [31:0] d);
    @(negedge clk);
    apb_req = '{psel: 1'b1, penable: 1'b0, pwrite: 1'b0, paddr: addr, pwdata: 32'd0};
    @(negedge clk);
    apb_req.penable = 1'b1;
    #1 d = apb_rsp.prdata;
    @(negedge clk);
    apb_req = '0;
  endtask

  int n_stall = 0;
  always @(posedge clk) if (rst_n && u_dut.hold && u_dut.busy) n_stall++;

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] run_cycles;
    int wrong = 0;
    ctx_req = '0;
    apb_req = '0;
    scale = 1 + $urandom % 20000;
    for (int i = 0; i < 4096; i++) u_l1.mem[i] = $urandom;
    for (int k = 0; k < NX; k++) u_l1.mem[X_W + k] = 32'($signed(16'($urandom)));
    // a few inputs at the int16 limits and at zero
    u_l1.mem[X_W + 0] = 32'(-32768);
    u_l1.mem[X_W + 1] = 32'(32767);
    u_l1.mem[X_W + 2] = 32'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    build_context();
    foreach (ctx[w]) ctx_write(w, ctx[w]);
    apb_write(MM_CTX_BASE, 32'd0);
    apb_write(MM_CTRL, 32'd1);
    repeat (2) @(negedge clk);
    while (!irq) @(negedge clk);
    apb_read(MM_CYCLES, run_cycles);

    for (int k = 0; k < NX; k++) begin
      checks++;
      if (u_l1.mem[Y_W + k] !== 32'(ref_y(k))) begin
        failures++;
        if (wrong++ < 8)
          $display("FAIL: y[%0d] = %0d, expected %0d (x %0d, scale %0d)", k,
                   $signed(u_l1.mem[Y_W + k]), ref_y(k), $signed(u_l1.mem[X_W + k]), scale);
      end
    end
    checks++;
    if (n_stall == 0) begin
      failures++;
      $display("FAIL: the pipeline never stalled");
    end
    $display("quant %0d x int16 -> int8: context %0d words, run %0d cycles (%0d stalled)",
             NX, ctx.size(), run_cycles, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
