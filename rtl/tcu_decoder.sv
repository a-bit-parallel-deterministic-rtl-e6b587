// tcu_decoder: binary to transition-coded-unary (thermometer) decoder.
//
// A W-bit binary value v becomes a 2**W-bit word whose v lowest bits are '1'
// and whose other bits are '0', so the ones are grouped at the trailing
// (right-hand) end and the position of the single 0->1 transition encodes v.
// Bit j of `tcu` (j = 0 is the paper's superscript 1) is set when j < v.
// Because v <= 2**W - 1, the top bit of `tcu` is always '0'.
//
// The multiplier uses two of these: one with W = B for operand X, producing
// X_u directly, and one with W = B-1 for the low bits of operand Y. The
// decoder's function and the trailing-ones order follow the paper; its
// internals (a comparison per output bit) are this design's own choice, the
// simplest circuit that produces the code.
//
// Interface: `bin` in, `tcu` out. Purely combinational, no clock, no latency
// in cycles.
module tcu_decoder #(
  parameter int unsigned W = 8             // binary input width
) (
  input  logic [W-1:0]      bin,           // binary value
  output logic [(1<<W)-1:0] tcu            // thermometer code, ones at the LSB end
);

  localparam int unsigned L = 1 << W;

  always_comb begin
    for (int unsigned j = 0; j < L; j++) begin
      tcu[j] = (j < 32'(bin));
    end
  end

endmodule
