// tb_nx_div32: random and corner vectors for DIV, DIVU, REM, REMU against integer division
// in the testbench (truncating toward zero, zero divisor and overflow per the RISC-V rules).
module tb_nx_div32;
  import nx_pkg::*;
  op_e op; logic [31:0] a, b, rd, exp;
  int checks = 0, failures = 0;
  nx_div32 u_dut (.op_i(op), .a_i(a), .b_i(b), .rd_o(rd));
  initial begin
    op_e ops[] = '{OP_DIV, OP_DIVU, OP_REM, OP_REMU};
    for (int n = 0; n < 4000; n++) begin
      longint sa, sb;
      op = ops[n % 4];
      a = (n % 23 == 0) ? 32'h8000_0000 : $urandom;
      b = (n % 19 == 0) ? 32'd0 : (n % 29 == 0) ? 32'hFFFF_FFFF : $urandom >> ($urandom % 32);
      sa = longint'(int'(a)); sb = longint'(int'(b));
      case (op)
        OP_DIV:  exp = (b == 0) ? 32'hFFFF_FFFF : 32'(sa / sb);
        OP_REM:  exp = (b == 0) ? a : 32'(sa % sb);
        OP_DIVU: exp = (b == 0) ? 32'hFFFF_FFFF : 32'(longint'(a) / longint'(b));
        default: exp = (b == 0) ? a : 32'(longint'(a) % longint'(b));
      endcase
      #1;
      checks++;
      if (rd !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL %s %h/%h: %h expected %h", op.name(), a, b, rd, exp);
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
