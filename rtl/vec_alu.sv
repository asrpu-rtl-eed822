// vec_alu: element-wise vector multiply, vector add and vector accumulate of a PE.
//
// The paper names these units (Vector MUL, Vector ADD, Vector ACUM) without detail.
// This design's choice: vectors are LANES signed 8-bit elements; MUL keeps the low
// 8 bits of each product, ADD wraps, and ACUM adds all elements (sign-extended) to a
// 32-bit scalar. Combinational.
//   op = 0: vout = a*b      op = 1: vout = a+b      op = 2: sout = sin + sum(b)
module vec_alu #(
  parameter int unsigned LANES = 8
) (
  input  logic        [1:0]         op,
  input  logic        [LANES*8-1:0] a,
  input  logic        [LANES*8-1:0] b,
  input  logic signed [31:0]        sin,
  output logic        [LANES*8-1:0] vout,
  output logic signed [31:0]        sout
);
  always_comb begin
    logic signed [31:0] s;
    s    = sin;
    vout = '0;
    for (int i = 0; i < LANES; i++) begin
      unique case (op)
        2'd0:    vout[i*8 +: 8] = 8'(signed'(a[i*8 +: 8]) * signed'(b[i*8 +: 8]));
        2'd1:    vout[i*8 +: 8] = a[i*8 +: 8] + b[i*8 +: 8];
        default: vout[i*8 +: 8] = 8'h00;
      endcase
      s = s + 32'(signed'(b[i*8 +: 8]));
    end
    sout = (op == 2'd2) ? s : sin;
  end
endmodule
