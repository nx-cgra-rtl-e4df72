// tb_nx_cfg_rf: configuration and core writes (configuration wins on a tie) and two read
// ports of the 32-entry register file, compared with a shadow array.
module tb_nx_cfg_rf;
  logic clk = 0, rst_n = 1'b1, cwe = 0, kwe = 0; logic [4:0] ca, ka, ra, rb;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [31:0] cd, kd, da, db;
  logic [31:0] shadow [32];
  int checks = 0, failures = 0;
  nx_cfg_rf #(.DEPTH(32)) u_dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(cwe), .cfg_addr_i(ca),
    .cfg_wdata_i(cd), .core_we_i(kwe), .core_waddr_i(ka), .core_wdata_i(kd), .raddr_a_i(ra),
    .raddr_b_i(rb), .rdata_a_o(da), .rdata_b_o(db));
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 32; i++) shadow[i] = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom);
      #1;
      checks++;
      if (da !== shadow[ra] || db !== shadow[rb]) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d %0d", ra, rb);
      end
      cwe = ($urandom % 3 == 0); ca = 5'($urandom); cd = $urandom;
      kwe = ($urandom % 3 == 0); ka = 5'($urandom); kd = $urandom;
      @(posedge clk);
      if (cwe) shadow[ca] = cd;
      else if (kwe) shadow[ka] = kd;
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
