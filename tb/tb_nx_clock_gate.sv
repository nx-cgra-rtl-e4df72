// tb_nx_clock_gate: checks that the gated clock pulses exactly in the cycles whose enable was
// high before the rising edge, that an enable change while the clock is high does not cut or
// create a pulse, and that test_en forces the clock on.
module tb_nx_clock_gate;
  logic clk = 0, en = 0, ten = 0, gclk;
  int checks = 0, failures = 0, pulses = 0, expected = 0;
  nx_clock_gate u_dut (.clk_i(clk), .en_i(en), .test_en_i(ten), .clk_o(gclk));
  always #5 clk = ~clk;
  always @(posedge gclk) pulses++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      en  = 1'($urandom);
      ten = (n % 50 == 0);
      if (en || ten) expected++;
      @(posedge clk);
      #1;
      check(gclk == (en || ten), $sformatf("cycle %0d gclk=%0b en=%0b", n, gclk, en));
      en = ~en;                    // change while the clock is high
      #2;
      check(gclk == !en || ten ? 1'b1 : 1'b0, "enable change while clock high keeps the pulse");
    end
    @(negedge clk);
    check(pulses == expected, $sformatf("pulses %0d expected %0d", pulses, expected));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
