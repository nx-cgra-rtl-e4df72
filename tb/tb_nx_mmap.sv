// tb_nx_mmap: APB writes and reads of every register of the memory map: trigger and clear
// pulses, CTX_BASE read-back, status and counters from the inputs, unmapped addresses.
module tb_nx_mmap;
  import nx_pkg::*;
  logic clk = 0, rst_n = 1'b1, trig, clr, irq, busy = 0, fetching = 0, dflag = 0;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [9:0] base; logic [23:0] cores = 0, cdone = 0; logic [31:0] cycles = 0;
  apb_req_t req = '0; apb_rsp_t rsp;
  int checks = 0, failures = 0, trig_n = 0, clr_n = 0;
  nx_mmap #(.NC(24)) u_dut (.clk_i(clk), .rst_ni(rst_n), .apb_req_i(req), .apb_rsp_o(rsp),
    .trigger_o(trig), .clear_done_o(clr), .ctx_base_o(base), .busy_i(busy),
    .fetching_i(fetching), .done_flag_i(dflag), .cores_i(cores), .core_done_i(cdone),
    .cycles_i(cycles), .irq_o(irq));
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (trig) trig_n++;
    if (clr) clr_n++;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); req = '{1'b1, 1'b0, 1'b1, a, d};
    @(negedge clk); req.penable = 1;
    #1 check(rsp.pready && !rsp.pslverr, "write ready");
    @(negedge clk); req = '0;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); req = '{1'b1, 1'b0, 1'b0, a, 32'd0};
    @(negedge clk); req.penable = 1;
    #1 d = rsp.prdata;
    check(rsp.pready, "read ready");
    @(negedge clk); req = '0;
  endtask
  initial begin
    logic [31:0] d;
    #12 rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      automatic logic [9:0] b = 10'($urandom);
      busy = 1'($urandom); fetching = 1'($urandom); dflag = 1'($urandom);
      cores = 24'($urandom); cdone = 24'($urandom); cycles = $urandom;
      wr(MM_CTX_BASE, {22'h3FFFFF, b});
      check(base == b, "CTX_BASE output");
      rd(MM_CTX_BASE, d);  check(d == {22'd0, b}, "CTX_BASE read");
      rd(MM_STATUS, d);    check(d == {29'd0, fetching, dflag, busy}, "STATUS");
      rd(MM_CORES, d);     check(d == {8'd0, cores}, "CORES");
      rd(MM_DONE, d);      check(d == {8'd0, cdone}, "DONE");
      rd(MM_CYCLES, d);    check(d == cycles, "CYCLES");
      rd(12'h0FC, d);      check(d == 0, "unmapped reads 0");
      check(irq == dflag, "irq is the done flag");
      wr(MM_CTRL, 32'd1);
      wr(MM_CTRL, 32'd2);
      wr(MM_CYCLES, 32'd3);  // read-only: no effect
    end
    check(trig_n == 40, $sformatf("trigger pulses %0d", trig_n));
    check(clr_n == 40, $sformatf("clear pulses %0d", clr_n));
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
