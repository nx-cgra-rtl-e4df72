// tb_nx_ctx_bank: fills the 512 x 32 bank, rewrites random bytes with byte enables, and reads
// every word back (one-cycle read latency), comparing with a shadow array; also checks that
// read data hold while the bank is not enabled.
module tb_nx_ctx_bank;
  logic clk = 0, ce = 0, we = 0; logic [3:0] be; logic [8:0] addr; logic [31:0] wd, rd;
  logic [31:0] shadow [512];
  int checks = 0, failures = 0;
  nx_ctx_bank u_dut (.clk_i(clk), .ce_i(ce), .we_i(we), .be_i(be), .addr_i(addr), .wdata_i(wd),
                     .rdata_o(rd));
  always #5 clk = ~clk;
  task automatic acc(bit w, int a, logic [3:0] b, logic [31:0] d);
    @(negedge clk);
    ce = 1; we = w; addr = 9'(a); be = b; wd = d;
    @(negedge clk);
    ce = 0; we = 0;
  endtask
  initial begin
    for (int i = 0; i < 512; i++) begin
      shadow[i] = $urandom;
      acc(1, i, 4'hF, shadow[i]);
    end
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom % 512; automatic logic [3:0] b = 4'($urandom); automatic logic [31:0] d = $urandom;
      acc(1, a, b, d);
      for (int k = 0; k < 4; k++) if (b[k]) shadow[a][k*8 +: 8] = d[k*8 +: 8];
    end
    for (int i = 0; i < 512; i++) begin
      acc(0, i, 4'h0, 0);
      checks++;
      if (rd !== shadow[i]) begin failures++; $display("FAIL word %0d %h exp %h", i, rd, shadow[i]); end
      @(negedge clk);
      checks++;
      if (rd !== shadow[i]) begin failures++; $display("FAIL hold %0d", i); end
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
