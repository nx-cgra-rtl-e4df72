// tb_nx_gec: runs the execution sequence with a memory-controller and array stand-in of random
// durations: trigger -> one fetch-enable pulse -> start pulse after the fetch is done -> run
// until end of execution; checks the order, the array clock enable, busy/fetching and that the
// cycle counter equals the measured run length. Triggers while busy are ignored.
module tb_nx_gec;
  logic clk = 0, rst_n = 1'b1, trig = 0, fen, mbusy = 0, mdone = 0, start, eoe = 0, cen, busy, fetching;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [31:0] cycles;
  int checks = 0, failures = 0, fen_n = 0, start_n = 0;
  nx_gec u_dut (.clk_i(clk), .rst_ni(rst_n), .trigger_i(trig), .fetch_en_o(fen),
    .mc_busy_i(mbusy), .mc_done_i(mdone), .start_o(start), .eoe_i(eoe), .array_clk_en_o(cen),
    .busy_o(busy), .fetching_o(fetching), .cycles_o(cycles));
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (fen) fen_n++;
    if (start) start_n++;
  end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #12 rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      automatic int fetch_len = 1 + $urandom % 20, run_len = 1 + $urandom % 40, n;
      @(negedge clk);
      check(!busy && !cen, "idle, array clock off");
      trig = 1;
      @(negedge clk);
      trig = 0;
      n = 0;
      while (!fen) begin @(negedge clk); n++; end
      check(n <= 1, "fetch enable follows trigger");
      check(fetching && busy && cen, "fetching, clock on");
      @(negedge clk);
      mbusy = 1;
      repeat (fetch_len) begin
        check(!start, "no start during fetch");
        trig = 1;     // ignored while busy
        @(negedge clk);
        trig = 0;
      end
      mbusy = 0; mdone = 1;
      @(negedge clk);
      mdone = 0;
      n = 0;
      while (!start) begin @(negedge clk); n++; end
      check(n <= 1, "start follows end of fetch");
      @(negedge clk);
      repeat (run_len - 1) begin check(busy && !fetching && cen, "running"); @(negedge clk); end
      eoe = 1;
      @(negedge clk);
      eoe = 0;
      check(cycles == run_len, $sformatf("cycle count %0d expected %0d", cycles, run_len));
      @(negedge clk);
    end
    check(fen_n == 30 && start_n == 30, $sformatf("pulses fetch %0d start %0d", fen_n, start_n));
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
