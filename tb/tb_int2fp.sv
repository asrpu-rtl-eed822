// tb_int2fp: checks integer to single-precision conversion. The reference converts
// through a double (exact for every 32-bit integer) and rounds the double's 52-bit
// fraction to 23 bits, nearest-even.
module tb_int2fp;
  logic [31:0] i, f;
  int checks = 0, failures = 0;
  int2fp dut (.i, .f);

  function automatic logic [31:0] ref_cvt(int v);
    logic [63:0] d;
    logic [22:0] m;
    logic [7:0]  e;
    logic        g, st;
    logic [23:0] mr;
    if (v == 0) return 0;
    d  = $realtobits(real'(v));
    e  = 8'(int'(d[62:52]) - 1023 + 127);
    m  = d[51:29];
    g  = d[28];
    st = |d[27:0];
    mr = {1'b0, m};
    if (g && (st || m[0])) mr = mr + 1;
    if (mr[23]) begin e = e + 1; mr = 0; end
    return {d[63], e, mr[22:0]};
  endfunction

  initial begin
    int vals[$] = '{1, -1, 2, 3, 16777216, 16777217, 16777219, 2147483647, -2147483648, 33554435};
    for (int t = 0; t < 3000; t++) begin
      if (t < vals.size()) i = vals[t];
      else i = (t % 2) ? $urandom : ($urandom >> ($urandom % 31));
      #1;
      checks++;
      if (f !== ref_cvt(i)) begin
        failures++;
        if (failures < 5) $display("MISMATCH i=%0d f=%h exp %h", $signed(i), f, ref_cvt(i));
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
