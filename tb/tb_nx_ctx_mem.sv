// tb_nx_ctx_mem: random reads and writes on both ports of the context memory against a shadow
// array: read data arrive the cycle after the grant, the memory controller port wins a bank
// conflict, the host port is granted whenever its bank is free, and both banks work in the
// same cycle.
module tb_nx_ctx_mem;
  import nx_pkg::*;
  logic clk = 0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  obi_req_t ereq = '0, mreq = '0; obi_rsp_t ersp, mrsp;
  logic [31:0] shadow [1024];
  logic [31:0] e_exp, m_exp; logic e_pend = 0, m_pend = 0, e_rd = 0, m_rd = 0;
  int checks = 0, failures = 0, conflicts = 0, parallel = 0;
  nx_ctx_mem u_dut (.clk_i(clk), .rst_ni(rst_n), .test_en_i(1'b0), .ext_req_i(ereq),
    .ext_rsp_o(ersp), .mc_req_i(mreq), .mc_rsp_o(mrsp));
  always #5 clk = ~clk;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) begin   // fill through the host port
      ereq = '{1'b1, 1'b1, 4'hF, 32'(i * 4), 32'(i * 32'h9E37_79B9)};
      shadow[i] = 32'(i * 32'h9E37_79B9);
      @(negedge clk);
    end
    ereq = '0;
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      automatic int ea = $urandom % 1024, ma = $urandom % 1024;
      automatic logic ew = ($urandom % 3 == 0);
      automatic logic [31:0] ed = $urandom;
      ereq = '{($urandom % 4 != 0), ew, 4'hF, 32'(ea * 4), ed};
      mreq = '{($urandom % 3 != 0), 1'b0, 4'hF, 32'(ma * 4), 32'd0};
      #1;
      // responses to last cycle's accesses
      if (e_pend) check(ersp.rvalid && (!e_rd || ersp.rdata == e_exp), "host read data");
      if (m_pend) check(mrsp.rvalid && mrsp.rdata == m_exp, "controller read data");
      check(mrsp.gnt == mreq.req, "controller always granted");
      check(ersp.gnt == (ereq.req && !(mreq.req && (ea / 512) == (ma / 512))), "host arbitration");
      if (ereq.req && mreq.req && (ea / 512) == (ma / 512)) conflicts++;
      if (ersp.gnt && mrsp.gnt) parallel++;
      e_pend = ersp.gnt; e_rd = !ew; m_pend = mrsp.gnt;
      if (m_pend) m_exp = shadow[ma];
      if (e_pend && !ew) e_exp = shadow[ea];
      @(posedge clk);
      if (e_pend && ew) shadow[ea] = ed;
      @(negedge clk);
    end
    check(conflicts > 0 && parallel > 0, $sformatf("conflicts %0d and parallel accesses %0d", conflicts, parallel));
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
