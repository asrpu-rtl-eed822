// int2fp: signed 32-bit integer to IEEE-754 single-precision conversion (the PE's
// "int->fp" unit). The paper only names the unit; this design rounds to nearest, ties
// to even, as IEEE-754 does by default. Combinational: find the leading one, shift it
// to bit 31, keep 23 fraction bits and round on the 8 bits below them.
module int2fp (
  input  logic [31:0] i,
  output logic [31:0] f
);
  always_comb begin
    logic        s;
    logic [31:0] m, n;
    logic [4:0]  lz;
    logic [7:0]  e;
    logic [23:0] mant;
    logic        g, st;
    s  = i[31];
    m  = s ? (~i + 32'd1) : i;
    lz = '0;
    for (int k = 0; k < 32; k++) if (m[k]) lz = 5'(31 - k);
    n    = m << lz;                 // leading one at bit 31
    e    = 8'(8'd158 - {3'b0, lz}); // 127 + 31 - lz
    mant = {1'b0, n[30:8]};
    g    = n[7];
    st   = |n[6:0];
    if (g && (st || n[8])) mant = mant + 24'd1;
    if (mant[23]) begin            // rounding overflowed the fraction
      e    = e + 8'd1;
      mant = '0;
    end
    f = (m == 32'd0) ? 32'd0 : {s, e, mant[22:0]};
  end
endmodule
