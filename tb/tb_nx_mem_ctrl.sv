// tb_nx_mem_ctrl: the memory controller walks a random context image (random records, cores
// and lengths) held by a context-memory stand-in, with random grant delays on both of its
// ports. Every configuration write must carry the right core, register file, index and data,
// in order; busy must cover the fetch, done pulse once, and the core mask list every core
// that received micro-code.
module tb_nx_mem_ctrl;
  import nx_pkg::*;
  logic clk = 0, rst_n = 1'b1, fen = 0, busy, done;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [9:0] base = 0; logic [23:0] cores, exp_cores;
  obi_req_t creq, freq; obi_rsp_t crsp, frsp;
  logic [31:0] image [1024];
  logic [31:0] exp_addr [$], exp_data [$];
  logic c_rv = 0, f_rv = 0; logic [31:0] c_rd;
  int checks = 0, failures = 0, done_n = 0;
  nx_mem_ctrl #(.NC(24)) u_dut (.clk_i(clk), .rst_ni(rst_n), .fetch_en_i(fen),
    .ctx_base_i(base), .busy_o(busy), .done_o(done), .cores_o(cores), .ctx_req_o(creq),
    .ctx_rsp_i(crsp), .cfg_req_o(freq), .cfg_rsp_i(frsp));
  always #5 clk = ~clk;
  logic cg, fg;
  always_ff @(posedge clk) begin cg <= $urandom % 3 != 0; fg <= $urandom % 2 != 0; end
  assign crsp = '{gnt: creq.req && cg, rvalid: c_rv, rdata: c_rd};
  assign frsp = '{gnt: freq.req && fg, rvalid: f_rv, rdata: 32'd0};
  always @(posedge clk) begin
    c_rv <= crsp.gnt;
    if (crsp.gnt) c_rd <= image[creq.addr[11:2]];
    f_rv <= frsp.gnt;
    if (done) done_n++;
    if (frsp.gnt) begin
      checks++;
      if (exp_addr.size() == 0 || freq.addr != exp_addr[0] || freq.wdata != exp_data[0]
          || !freq.we) begin
        failures++;
        if (failures < 10) $display("FAIL cfg write %h %h", freq.addr, freq.wdata);
      end
      if (exp_addr.size() != 0) begin void'(exp_addr.pop_front()); void'(exp_data.pop_front()); end
    end
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      automatic int p = 100 * run, t;
      base = 10'(p);
      exp_cores = '0;
      for (int r = 0; r < 12; r++) begin
        automatic int core = $urandom % 24, sel = $urandom % 2, idx = $urandom % 8, cnt = 1 + $urandom % 6;
        image[p++] = ctx_header(core, cfg_sel_e'(sel), idx, cnt);
        if (sel == 0) exp_cores[core] = 1;
        for (int k = 0; k < cnt; k++) begin
          image[p] = $urandom;
          exp_addr.push_back({19'd0, 5'(core), 1'(sel), 5'(idx + k), 2'b00});
          exp_data.push_back(image[p]);
          p++;
        end
      end
      image[p] = 32'd0;
      @(negedge clk);
      fen = 1;
      @(negedge clk);
      fen = 0;
      t = 0;
      while (!done && t < 5000) begin
        check(busy, "busy during fetch");
        @(negedge clk);
        t++;
      end
      @(negedge clk);
      check(!busy, "idle after fetch");
      check(exp_addr.size() == 0, $sformatf("all words written (%0d left)", exp_addr.size()));
      check(cores == exp_cores, $sformatf("core mask %h expected %h", cores, exp_cores));
    end
    check(done_n == 6, "one done pulse per fetch");
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
