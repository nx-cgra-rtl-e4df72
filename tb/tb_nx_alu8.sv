// tb_nx_alu8: random vectors for the 8-bit ALU (MUL8U, MAC4, SAT8, DIV8) against a model
// built from per-lane integer arithmetic.
module tb_nx_alu8;
  import nx_pkg::*;
  op_e op; logic [31:0] a, b, c, rd;
  int checks = 0, failures = 0;
  nx_alu8 u_dut (.op_i(op), .a_i(a), .b_i(b), .c_i(c), .rd_o(rd));

  function automatic logic [31:0] model(op_e o, logic [31:0] x, logic [31:0] y, logic [31:0] z);
    int s;
    case (o)
      OP_MUL8U: return int'(x[7:0]) * int'(y[7:0]);
      OP_MAC4: begin
        s = int'(z);
        for (int l = 0; l < 4; l++) begin
          int p = int'(x >> (8 * l) & 255), q = int'(y >> (8 * l) & 255);
          if (p > 127) p -= 256;
          if (q > 127) q -= 256;
          s += p * q;
        end
        return s;
      end
      OP_SAT8: begin
        s = int'(x);
        return (s > 127) ? 127 : (s < -128) ? -128 : s;
      end
      OP_DIV8: return (y[7:0] == 0) ? 255 : int'(x[7:0]) / int'(y[7:0]);
      default: return 0;
    endcase
  endfunction

  initial begin
    op_e ops[] = '{OP_MUL8U, OP_MAC4, OP_SAT8, OP_DIV8, OP_ADD};
    for (int n = 0; n < 4000; n++) begin
      op = ops[n % ops.size()];
      a = $urandom;
      if (n % 3 == 0) a = 32'($signed(8'($urandom)));   // in range for SAT8
      if (n % 13 == 0) a = 32'h8080_8080;
      b = (n % 9 == 0) ? 32'h8080_8080 : $urandom;
      if (n % 17 == 0) b = 0;
      c = $urandom;
      #1;
      checks++;
      if (rd !== model(op, a, b, c)) begin
        failures++;
        if (failures < 10) $display("FAIL %s a=%h b=%h c=%h: %h expected %h", op.name(), a, b, c,
                                    rd, model(op, a, b, c));
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
