// vec_mac: vector multiply-and-accumulate unit of a processing element.
//
// Computes acc_out = acc_in + sum_{i<LANES} a[i]*b[i], where acc_in is a 32-bit
// accumulator and a, b are vectors of LANES signed 8-bit values. This is the operation
// the paper gives for the PE's vector MAC, with the paper's vector size of 8 as default.
// Purely combinational (the PE uses it in a single execute cycle). Treating the 8-bit
// elements as signed two's-complement numbers and letting the 32-bit sum wrap are this
// design's choices.
module vec_mac #(
  parameter int unsigned LANES = 8
) (
  input  logic signed [31:0]        acc_in,
  input  logic        [LANES*8-1:0] a,
  input  logic        [LANES*8-1:0] b,
  output logic signed [31:0]        acc_out
);
  always_comb begin
    logic signed [31:0] sum;
    sum = acc_in;
    for (int i = 0; i < LANES; i++) begin
      sum = sum + 32'(signed'(a[i*8 +: 8]) * signed'(b[i*8 +: 8]));
    end
    acc_out = sum;
  end
endmodule
