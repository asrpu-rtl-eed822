// tb_vec_mac: checks the vector MAC against a scalar reference on random vectors,
// including the extreme values -128 and 127 in every lane.
module tb_vec_mac;
  localparam int L = 8;
  logic signed [31:0] acc_in, acc_out;
  logic [L*8-1:0] a, b;
  int checks = 0, failures = 0;
  vec_mac #(.LANES(L)) dut (.acc_in, .a, .b, .acc_out);

  function automatic int ref_mac(int acc, logic [L*8-1:0] x, logic [L*8-1:0] y);
    int r = acc;
    for (int i = 0; i < L; i++) begin
      int p, q;
      p = x[i*8 +: 8]; if (p > 127) p -= 256;
      q = y[i*8 +: 8]; if (q > 127) q -= 256;
      r += p * q;
    end
    return r;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      acc_in = $urandom;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (t == 0) begin a = {L{8'h80}}; b = {L{8'h80}}; end
      if (t == 1) begin a = {L{8'h7f}}; b = {L{8'h80}}; end
      #1;
      checks++;
      if (acc_out !== ref_mac(acc_in, a, b)) begin
        failures++;
        if (failures < 5) $display("MISMATCH acc=%0d got %0d exp %0d", acc_in, acc_out, ref_mac(acc_in, a, b));
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
