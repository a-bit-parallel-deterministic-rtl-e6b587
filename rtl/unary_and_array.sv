// unary_and_array: N-bit unary stochastic multiplication.
//
// One two-input AND gate per bit position: o_u^n = x_u^n & y_u^n for all N
// positions at once. For unipolar streams the fraction of ones in the result
// approximates the product of the fractions in the operands; the error depends
// only on how the ones of the two streams are correlated, which the encoders
// upstream arrange. This block follows the paper exactly.
//
// Interface: `xu`, `yu` in, `ou` out, all N bits. Purely combinational.
module unary_and_array #(
  parameter int unsigned N = 256                     // stream length
) (
  input  logic [N-1:0] xu,
  input  logic [N-1:0] yu,
  output logic [N-1:0] ou
);

  always_comb begin
    for (int unsigned n = 0; n < N; n++) begin
      ou[n] = xu[n] & yu[n];
    end
  end

endmodule
