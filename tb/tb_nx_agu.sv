// tb_nx_agu: direct and previous-plus-stride addresses, and the previous-address register,
// against a reference kept in the testbench.
module tb_nx_agu;
  logic clk = 0, rst_n = 1'b1, up = 0, upd = 0; logic [31:0] off, addr, prev, m_prev = 0, exp;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  int checks = 0, failures = 0;
  nx_agu u_dut (.clk_i(clk), .rst_ni(rst_n), .use_prev_i(up), .offset_i(off), .update_i(upd),
                .addr_o(addr), .prev_o(prev));
  always #5 clk = ~clk;
  initial begin
    #12 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      up = 1'($urandom); upd = 1'($urandom);
      off = (n % 4 == 0) ? -32'd4 : $urandom % 64;
      exp = up ? m_prev + off : off;
      #1;
      checks++;
      if (addr !== exp || prev !== m_prev) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d addr %h exp %h", n, addr, exp);
      end
      @(posedge clk);
      if (upd) m_prev = exp;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
