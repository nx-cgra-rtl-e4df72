// tb_nx_lsu: the load-store unit against a one-port memory model that refuses requests at
// random, with a random array-wide hold from other cores on top of the unit's own stall.
// A random program of loads, stores and idle steps is executed in "schedule steps" (cycles in
// which the hold is low). Every load must deliver, in program order, the value the memory
// holds after all earlier stores, exactly one schedule step after the load retired; the
// final memory must match a reference that applies the stores in order.
module tb_nx_lsu;
  import nx_pkg::*;
  localparam int NOPS = 600;
  logic clk = 0, rst_n = 1'b1, issue, we, hold, ext_hold = 0, stall, lv;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [31:0] addr, wd, ld; logic [4:0] tag, ltag;
  obi_req_t req; obi_rsp_t rsp;
  int checks = 0, failures = 0, pc = 0, step = 0, held = 0, stalled = 0;
  typedef struct {int kind; int a; logic [31:0] d; logic [31:0] exp;} op_t;  // 0 idle 1 ld 2 st
  op_t prog [NOPS];
  logic [31:0] shadow [16];
  int ret_q [$];   // schedule step at which each load retired
  int ret_i [$];   // its program index

  nx_lsu #(.TAG_W(5)) u_dut (.clk_i(clk), .rst_ni(rst_n), .issue_i(issue), .we_i(we),
    .addr_i(addr), .wdata_i(wd), .tag_i(tag), .hold_i(hold), .stall_o(stall),
    .load_valid_o(lv), .load_data_o(ld), .load_tag_o(ltag), .obi_req_o(req), .obi_rsp_i(rsp));
  nx_l1_model #(.N_PORTS(1), .N_BANKS(1), .WORDS(64), .STALL_ONE_IN(3)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));
  always #5 clk = ~clk;
  assign hold = stall || ext_hold;

  always_comb begin
    issue = 0; we = 0; addr = 0; wd = 0; tag = 0;
    if (pc < NOPS && prog[pc].kind != 0) begin
      issue = 1; we = prog[pc].kind == 2; addr = 32'(prog[pc].a * 4); wd = prog[pc].d;
      tag = 5'(pc);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (stall) stalled++;
    if (hold) held++;
    if (lv) begin
      int i, s;
      checks++;
      if (ret_q.size() == 0) begin
        failures++; $display("FAIL: load data with no retired load");
      end else begin
        s = ret_q.pop_front(); i = ret_i.pop_front();
        if (s + 1 != step || ld !== prog[i].exp || ltag !== 5'(i)) begin
          failures++;
          if (failures < 10) $display("FAIL load %0d: step %0d (retired %0d) data %h exp %h",
                                      i, step, s, ld, prog[i].exp);
        end
      end
    end
    if (!hold) begin
      if (pc < NOPS && prog[pc].kind == 1) begin ret_q.push_back(step); ret_i.push_back(pc); end
      pc <= pc + 1;
      step <= step + 1;
    end
  end

  initial begin
    for (int i = 0; i < 16; i++) shadow[i] = 32'h1000 + i;
    for (int i = 0; i < 64; i++) u_mem.mem[i] = (i < 16) ? shadow[i] : 0;
    for (int i = 0; i < NOPS; i++) begin
      prog[i].kind = (i >= NOPS - 4) ? 0 : $urandom % 3;
      prog[i].a = $urandom % 16;
      prog[i].d = $urandom;
      if (prog[i].kind == 1) prog[i].exp = shadow[prog[i].a];
      if (prog[i].kind == 2) shadow[prog[i].a] = prog[i].d;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (pc < NOPS) begin
      @(negedge clk);
      ext_hold = ($urandom % 5 == 0);
    end
    ext_hold = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[i] !== shadow[i]) begin failures++; $display("FAIL mem[%0d]", i); end
    end
    checks++;
    if (ret_q.size() != 0 || stalled == 0 || held == stalled) begin
      failures++; $display("FAIL: pending %0d stalled %0d held %0d", ret_q.size(), stalled, held);
    end
    $display("steps %0d, stall cycles %0d, hold cycles %0d", step, stalled, held);
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
