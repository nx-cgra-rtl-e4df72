// tb_nx_sleep_unit: drives start, exit and configuration activity in random order and
// compares awake, done and the clock enable with a reference state kept in the testbench.
module tb_nx_sleep_unit;
  logic clk = 0, rst_n = 1'b1, start = 0, exit_ = 0, cfg = 0, awake, done, clk_en;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic m_awake = 0, m_done = 0;
  int checks = 0, failures = 0;
  nx_sleep_unit u_dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .exit_i(exit_),
                       .cfg_active_i(cfg), .awake_o(awake), .done_o(done), .clk_en_o(clk_en));
  always #5 clk = ~clk;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      start = ($urandom % 10 == 0);
      exit_ = ($urandom % 4 == 0);
      cfg   = ($urandom % 6 == 0);
      #1;
      checks++;
      if (clk_en != (m_awake || start || cfg)) begin
        failures++; $display("FAIL clk_en at %0d", n);
      end
      @(posedge clk);
      if (start) begin m_awake = 1; m_done = 0; end
      else if (exit_ && m_awake) begin m_awake = 0; m_done = 1; end
      #1;
      checks++;
      if (awake != m_awake || done != m_done) begin
        failures++; $display("FAIL state at %0d: %b%b expected %b%b", n, awake, done, m_awake, m_done);
      end
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
