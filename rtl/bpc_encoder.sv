// bpc_encoder: bit-position correlation encoder for operand Y.
//
// It turns the MSB of Y_b (y_b^B) and the thermometer code of the B-1 low bits
// of Y_b (y_i, ones at the trailing end) into the N = 2**B bit unary stream
// Y_u, in an order chosen so that, ANDed with a trailing-ones X_u, the count of
// ones of the product tracks X_b*Y_b/N.
//
// Layout, with bit n of `yu` being the paper's y_u^(n+1):
//   y_u^N      = msb                       (the buffered MSB wire)
//   y_u^(N-1)  = 0                         (constant zero)
//   for k = 1 .. 2**(B-1)-1, pair k:
//     y_u^(N-2k)   = msb | y_i^k           (OR gate)
//     y_u^(N-2k-1) = msb & y_i^k           (AND gate)
// When msb = 1 every OR output is '1' (2**(B-1) ones including y_u^N) and the
// AND outputs add one '1' per set y_i bit; when msb = 0 only the OR outputs of
// the set y_i bits are '1'. Either way Y_u holds exactly Y_b ones, spread over
// the stream from its leading end downwards, two positions per pair.
//
// The MSB wire, the constant zero and the AND/OR pairs are printed in the
// paper's schematic; which output each gate drives is derived from the three
// worked examples the paper tabulates (all three are reproduced exactly).
// The top y_i bit, y_i^(2**(B-1)), is always '0' for a (B-1)-bit value and is
// marked unused in the schematic; the port keeps it so the decoder output
// connects whole, and it is left unread.
//
// Interface: `msb`, `yi` in, `yu` out. Purely combinational.
module bpc_encoder #(
  parameter int unsigned B = 8                       // operand width
) (
  input  logic                    msb,               // y_b^B
  input  logic [(1<<(B-1))-1:0]   yi,                // y_i^(2^(B-1)) .. y_i^1
  output logic [(1<<B)-1:0]       yu                 // y_u^N .. y_u^1
);

  localparam int unsigned N = 1 << B;
  localparam int unsigned H = 1 << (B - 1);

  always_comb begin
    yu[N-1] = msb;
    yu[N-2] = 1'b0;
    for (int unsigned k = 1; k < H; k++) begin
      yu[N-2*k-1] = msb | yi[k-1];
      yu[N-2*k-2] = msb & yi[k-1];
    end
  end

endmodule
