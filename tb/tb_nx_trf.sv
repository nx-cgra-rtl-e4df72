// tb_nx_trf: random writes and three simultaneous random reads of the temporary register
// file compared with a shadow array; checks reset to zero.
module tb_nx_trf;
  logic clk = 0, rst_n = 1'b1, we = 0; logic [2:0] ra, rb, rc, wa; logic [31:0] da, db, dc, wd;
  initial #1 rst_n = 1'b0;   // falling edge: applies the asynchronous reset
  logic [31:0] shadow [8];
  int checks = 0, failures = 0;
  nx_trf #(.DEPTH(8)) u_dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .raddr_b_i(rb),
    .raddr_c_i(rc), .rdata_a_o(da), .rdata_b_o(db), .rdata_c_o(dc), .we_i(we), .waddr_i(wa),
    .wdata_i(wd));
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 8; i++) shadow[i] = 0;
    #12 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      ra = 3'($urandom); rb = 3'($urandom); rc = 3'($urandom);
      #1;
      checks++;
      if (da !== shadow[ra] || db !== shadow[rb] || dc !== shadow[rc]) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d %0d %0d", ra, rb, rc);
      end
      we = 1'($urandom); wa = 3'($urandom); wd = $urandom;
      @(posedge clk);
      if (we) shadow[wa] = wd;
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
