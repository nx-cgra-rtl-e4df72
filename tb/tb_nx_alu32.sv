// tb_nx_alu32: random and corner-case vectors for the 32-bit ALU against reference arithmetic.
module tb_nx_alu32;
  import nx_pkg::*;
  op_e op; logic [31:0] a, b, c, rd; logic [1:0] lane;
  int checks = 0, failures = 0;
  nx_alu32 u_dut (.op_i(op), .a_i(a), .b_i(b), .c_i(c), .lane_i(lane), .rd_o(rd));

  function automatic logic [31:0] model(op_e o, logic [31:0] x, logic [31:0] y, logic [31:0] z,
                                        logic [1:0] l);
    case (o)
      OP_MOV:   return x;
      OP_ADD:   return x + y;
      OP_SUB:   return x + ~y + 1;
      OP_AND:   return x & y;
      OP_OR:    return x | y;
      OP_XOR:   return x ^ y;
      OP_SLL:   return x << (y % 32);
      OP_SRL:   return x >> (y % 32);
      OP_SRA:   return (x >> (y % 32)) | (x[31] ? ~(32'hFFFF_FFFF >> (y % 32)) : 32'd0);
      OP_SLT:   return (x[31] != y[31]) ? 32'(x[31]) : 32'(x < y);
      OP_SLTU:  return 32'(x < y);
      OP_SEQ:   return 32'(x == y);
      OP_MERGE: begin
        logic [31:0] r;
        for (int i = 0; i < 32; i++) r[i] = z[i] ? y[i] : x[i];
        return r;
      end
      OP_SEL:   return (z != 0) ? x : y;
      OP_BEXT:  return (x >> (8 * l)) & 32'hFF;
      OP_ADDC:  return x + y + z;
      default:  return 0;
    endcase
  endfunction

  initial begin
    op_e ops[] = '{OP_MOV, OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_SLL, OP_SRL, OP_SRA, OP_SLT,
                   OP_SLTU, OP_SEQ, OP_MERGE, OP_SEL, OP_BEXT, OP_ADDC, OP_MUL32, OP_NOP};
    for (int n = 0; n < 4000; n++) begin
      op = ops[n % ops.size()];
      a = (n % 7 == 0) ? 32'h8000_0000 : $urandom;
      b = (n % 5 == 0) ? a : $urandom;
      c = (n % 11 == 0) ? 0 : $urandom;
      lane = 2'($urandom);
      #1;
      checks++;
      if (rd !== model(op, a, b, c, lane)) begin
        failures++;
        if (failures < 10) $display("FAIL %s a=%h b=%h c=%h: %h expected %h", op.name(), a, b, c,
                                    rd, model(op, a, b, c, lane));
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
