// tb_rv_alu: checks every RV32I ALU operation against a reference on random operands.
module tb_rv_alu;
  logic [3:0] op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;
  rv_alu dut (.op, .a, .b, .y);

  function automatic logic [31:0] ref_alu(logic [3:0] o, logic [31:0] x, logic [31:0] z);
    int sx = x, sz = z;
    case (o)
      4'b0000: return x + z;
      4'b1000: return x - z;
      4'b0001, 4'b1001: return x << z[4:0];
      4'b0010, 4'b1010: return (sx < sz) ? 1 : 0;
      4'b0011, 4'b1011: return (x < z) ? 1 : 0;
      4'b0100, 4'b1100: return x ^ z;
      4'b0101: return x >> z[4:0];
      4'b1101: return sx >>> z[4:0];
      4'b0110, 4'b1110: return x | z;
      default: return x & z;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      op = 4'(t % 16);
      a = $urandom; b = $urandom;
      if (t % 7 == 0) b = a;
      #1;
      checks++;
      if (y !== ref_alu(op, a, b)) begin
        failures++;
        if (failures < 5) $display("MISMATCH op=%b a=%h b=%h y=%h", op, a, b, y);
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
