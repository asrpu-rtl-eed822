// tb_vec_alu: checks element-wise multiply (low 8 bits), wrapping add and the
// accumulate reduction against scalar references on random vectors.
module tb_vec_alu;
  localparam int L = 8;
  logic [1:0] op;
  logic [L*8-1:0] a, b, vout;
  logic signed [31:0] sin, sout;
  int checks = 0, failures = 0;
  vec_alu #(.LANES(L)) dut (.op, .a, .b, .sin, .vout, .sout);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [L*8-1:0] ev;
      int es;
      op  = 2'(t % 3);
      a   = {$urandom, $urandom};
      b   = {$urandom, $urandom};
      sin = $urandom;
      #1;
      es = sin;
      ev = '0;
      for (int i = 0; i < L; i++) begin
        int p, q;
        p = a[i*8 +: 8]; if (p > 127) p -= 256;
        q = b[i*8 +: 8]; if (q > 127) q -= 256;
        if (op == 0) ev[i*8 +: 8] = 8'(p * q);
        if (op == 1) ev[i*8 +: 8] = 8'(p + q);
        if (op == 2) es += q;
      end
      checks++;
      if (op != 2 && vout !== ev) failures++;
      if (op == 2 && sout !== es) failures++;
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
