// lut_sum: the multi-operand adder of the LUT-based reducer.
//
// It adds NUM operands of W bits each: the low bits of the input that bypass
// the tables (read as an ordinary binary number) and the outputs of the N/k
// tables, each already an element of Z_q. The result is the intermediate
// sum c_hat, which is congruent to the input modulo q and at most about
// (N/k + 1) * q, so it needs only a few bits more than the modulus.
//
// Interface: terms[NUM-1:0][W-1:0] in, sum[SW-1:0] out. Combinational.
//
// The method fixes only what is added ("(N/k + 1) x n-bit addition"). The
// adder itself is this design's choice: a plain chained sum that synthesis
// is free to restructure into a tree or carry-save form. SW is chosen by the
// caller from the largest sum that can occur; the sum is truncated to SW
// bits, which is exact as long as SW covers that maximum.
module lut_sum #(
  parameter int unsigned NUM = 3,   // operands: bypass term + N/k tables
  parameter int unsigned W   = 12,  // operand width (n)
  parameter int unsigned SW  = 14   // sum width
) (
  input  logic [NUM-1:0][W-1:0] terms,
  output logic [SW-1:0]         sum
);

  always_comb begin
    sum = '0;
    for (int unsigned t = 0; t < NUM; t++) sum = sum + SW'(terms[t]);
  end

endmodule
