// tb_nx_array: configures all 24 cores of the array over its configuration port and runs a
// program that checks the torus wiring: every core loads its own id, then copies its N, S, E
// and W neighbour in turn; after each schedule step every output is compared with the id the
// torus (with wrap-around in both directions) predicts. The MOBs then store their id to and
// load it back from a memory model that refuses requests at random and has bank conflicts,
// which makes the whole array stall; the loaded value must reach the MOB's output, and every
// core must end done.
module tb_nx_array;
  import nx_pkg::*;
  logic clk = 0, rst_n = 1'b1, start = 0, hold;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  obi_req_t creq = '0; obi_rsp_t crsp;
  obi_req_t [7:0] mreq; obi_rsp_t [7:0] mrsp;
  logic [23:0] done, awake;
  int checks = 0, failures = 0, steps = 0, holds = 0;
  nx_array u_dut (.clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .start_i(start),
    .cfg_req_i(creq), .cfg_rsp_o(crsp), .mem_req_o(mreq), .mem_rsp_i(mrsp), .done_o(done),
    .awake_o(awake), .hold_o(hold));
  nx_l1_model #(.N_PORTS(8), .N_BANKS(2), .WORDS(256), .STALL_ONE_IN(4)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(mreq), .rsp_o(mrsp));
  always #5 clk = ~clk;

  function automatic int id(int r, int c);
    return 100 + ((r + 6) % 6) * 4 + (c + 4) % 4;
  endfunction

  task automatic cfg(int core, cfg_sel_e s, int idx, logic [31:0] d);
    @(negedge clk);
    creq = '{1'b1, 1'b1, 4'hF, {19'd0, 5'(core), s, 5'(idx), 2'b00}, d};
    @(negedge clk);
    creq = '0;
    checks++;
    if (!crsp.rvalid) begin failures++; $display("FAIL: no configuration response"); end
  endtask

  task automatic check_outs(string what, int dr, int dc);
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (u_dut.outs[r * 4 + c] !== 32'(id(r + dr, c + dc))) begin
          failures++;
          if (failures < 10) $display("FAIL %s core (%0d,%0d): %0d expected %0d", what, r, c,
                                      u_dut.outs[r * 4 + c], id(r + dr, c + dc));
        end
      end
  endtask

  // called just after a falling edge: wait for the next schedule step (a clock edge
  // without hold) and return just after the following falling edge
  task automatic next_step();
    bit h;
    do begin
      #4 h = hold;
      if (h) holds++;
      @(posedge clk);
      @(negedge clk);
    end while (h);
    steps++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int core = 0; core < 24; core++) begin
      automatic int r = core / 4, c = core % 4;
      automatic logic [31:0] p [$] = '{enc(OP_MOV, SRC_CRF, 0, SRC_ZERO, 0, 0, 0, 0),
                                       enc(OP_MOV, SRC_N, 0, SRC_ZERO, 0, 0, 0, 0),
                                       enc(OP_MOV, SRC_S, 0, SRC_ZERO, 0, 0, 0, 0),
                                       enc(OP_MOV, SRC_E, 0, SRC_ZERO, 0, 0, 0, 0),
                                       enc(OP_MOV, SRC_W, 0, SRC_ZERO, 0, 0, 0, 0)};
      if (row_is_mob(r)) begin
        p.push_back(enc(OP_ST, SRC_CRF, 1, SRC_SELF, 0, 0, 0, 0));
        p.push_back(enc(OP_MOV, SRC_ZERO, 0, SRC_ZERO, 0, 0, 0, 0));
        p.push_back(enc(OP_LD, SRC_CRF, 1, SRC_ZERO, 0, 0, 0, 0));
        p.push_back(enc(OP_NOP, SRC_ZERO, 0, SRC_ZERO, 0, 0, 0, 0));
      end
      p.push_back(enc(OP_EXIT, SRC_ZERO, 0, SRC_ZERO, 0, 0, 0, 0));
      foreach (p[i]) cfg(core, CFG_IRF, i, p[i]);
      cfg(core, CFG_CRF, 0, 32'(id(r, c)));
      cfg(core, CFG_CRF, 1, 32'(4 * (8 + core)));
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    next_step(); check_outs("own id", 0, 0);
    next_step(); check_outs("north", -1, 0);
    next_step(); check_outs("north of south", 0, 0);
    next_step(); check_outs("east", 0, 1);
    next_step(); check_outs("west of east", 0, 0);
    repeat (4) next_step();
    for (int core = 0; core < 24; core++) if (row_is_mob(core / 4)) begin
      checks++;
      if (u_dut.outs[core] !== 32'(id(core / 4, core % 4)) ||
          u_mem.mem[8 + core] !== 32'(id(core / 4, core % 4))) begin
        failures++;
        $display("FAIL MOB %0d store/load: out %0d mem %0d", core, u_dut.outs[core],
                 u_mem.mem[8 + core]);
      end
    end
    next_step();
    repeat (2) @(negedge clk);
    checks++;
    if (done !== '1 || awake !== '0) begin
      failures++; $display("FAIL done %h awake %h", done, awake);
    end
    checks++;
    if (holds == 0) begin failures++; $display("FAIL: the array never stalled"); end
    $display("steps %0d, hold cycles %0d", steps, holds);
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
