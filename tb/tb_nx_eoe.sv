// tb_nx_eoe: random active masks, random finishing orders and random clears, compared cycle by
// cycle with a reference model: end of execution pulses once per start, in the first cycle
// in which every active core is done; the flag holds until cleared or restarted. An empty
// active mask ends at once.
module tb_nx_eoe;
  localparam int N = 24;
  logic clk = 0, rst_n = 1'b1, start = 0, clr = 0, eoe, flag;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [N-1:0] active = 0, done = 0;
  logic m_armed = 0, m_flag = 0, m_eoe;
  int checks = 0, failures = 0, pulses = 0;
  nx_eoe #(.N_CORES(N)) u_dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .active_i(active),
    .done_i(done), .clear_i(clr), .eoe_o(eoe), .eoe_flag_o(flag));
  always #5 clk = ~clk;
  initial begin
    #12 rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      for (int cyc = 0; cyc < 40; cyc++) begin
        @(negedge clk);
        start = (cyc == 0);
        if (cyc == 0) begin
          active = (run % 10 == 0) ? '0 : N'($urandom);
          done   = '0;
        end else if (cyc == 30) begin
          done = done | active;
        end else if ($urandom % 2 == 0) begin
          done[$urandom % N] = 1'b1;
        end
        clr = ($urandom % 16 == 0);
        #1;
        m_eoe = m_armed && ((done & active) == active);
        checks++;
        if (eoe !== m_eoe || flag !== m_flag) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d cyc %0d: eoe %b/%b flag %b/%b", run, cyc,
                                      eoe, m_eoe, flag, m_flag);
        end
        if (eoe) pulses++;
        @(posedge clk);
        if (start) m_armed = 1; else if (m_eoe) m_armed = 0;
        if (m_eoe) m_flag = 1; else if (clr || start) m_flag = 0;
      end
    end
    checks++;
    if (pulses < 50) begin failures++; $display("FAIL: only %0d end-of-execution pulses", pulses); end
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
