// tb_nx_mul: random vectors for MUL16U and MUL32 against 64-bit integer products.
module tb_nx_mul;
  import nx_pkg::*;
  op_e op; logic [31:0] a, b, rd, exp;
  int checks = 0, failures = 0;
  nx_mul u_dut (.op_i(op), .a_i(a), .b_i(b), .rd_o(rd));
  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint p;
      a = (n % 10 == 0) ? 32'h8000_0000 : $urandom;
      b = (n % 7 == 0) ? 32'hFFFF_FFFF : $urandom;
      case (n % 3)
        0: begin op = OP_MUL16U; p = longint'(a & 32'hFFFF) * longint'(b & 32'hFFFF); end
        1: begin op = OP_MUL32;  p = longint'(int'(a)) * longint'(int'(b)); end
        default: begin op = OP_DIV; p = 0; end
      endcase
      exp = p[31:0];
      #1;
      checks++;
      if (rd !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL %s %h*%h: %h expected %h", op.name(), a, b, rd, exp);
      end
    end
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
