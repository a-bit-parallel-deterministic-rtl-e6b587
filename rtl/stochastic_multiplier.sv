// stochastic_multiplier: bit-parallel deterministic stochastic multiplier.
//
// Multiplies two B-bit unsigned operands read as fractions X_b/N and Y_b/N
// (N = 2**B) and returns the product as an N-bit unary stream O_u whose count
// of ones approximates X_b*Y_b/N. All N stream bits are produced in parallel
// by combinational logic, so a product takes one pass through the gates
// rather than N clock cycles.
//
//   X_b ---------------------> tcu_decoder(B)   --> X_u --+
//   Y_b[B-2:0] --------------> tcu_decoder(B-1) --> y_i   |
//   Y_b[B-1] (y_b^B) --------> bpc_encoder <------ y_i    |
//                              bpc_encoder -----> Y_u --> unary_and_array --> O_u
//
// X_u has its X_b ones at the trailing end. Y_u is built by the bit-position
// correlation encoder so that its ones sit where they give a product count
// close to X_b*Y_b/N (see bpc_encoder). The structure follows the paper.
// The fanout buffers of the schematic, which only restore drive strength on
// the y_b^B and y_i nets, are plain wires here. No registers are added:
// the paper gives the multiplier as a gate network and so is this module.
//
// Interface: `xb`, `yb` in; `ou` out with bit n = o_u^(n+1). Combinational,
// zero cycles of latency; a testbench samples `ou` after any settling delay.
module stochastic_multiplier
  import stoch_mul_pkg::*;
#(
  parameter int unsigned B = DEFAULT_B                // operand width
) (
  input  logic [B-1:0]      xb,                       // operand X_b
  input  logic [B-1:0]      yb,                       // operand Y_b
  output logic [(1<<B)-1:0] ou                        // product stream O_u
);

  localparam int unsigned N = stream_len(B);
  localparam int unsigned H = half_len(B);

  logic [N-1:0] xu;
  logic [H-1:0] yi;
  logic [N-1:0] yu;

  tcu_decoder #(.W(B)) u_x_decoder (
    .bin (xb),
    .tcu (xu)
  );

  tcu_decoder #(.W(B-1)) u_y_decoder (
    .bin (yb[B-2:0]),
    .tcu (yi)
  );

  bpc_encoder #(.B(B)) u_encoder (
    .msb (yb[B-1]),
    .yi  (yi),
    .yu  (yu)
  );

  unary_and_array #(.N(N)) u_and_array (
    .xu (xu),
    .yu (yu),
    .ou (ou)
  );

endmodule
