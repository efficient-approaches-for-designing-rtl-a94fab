// nft_gate -- 3x3 new fault tolerant (NFT) reversible gate.
//
// Outputs:  P = A ^ B,  Q = ~B&C ^ A&~C,  R = B&C ^ A&~C.
// With A = 0 it is a parity-preserving AND: R = B&C, with P = B and
// Q = ~B&C left as garbage. Every adder here uses it that way.
//
// The figure that defines the gate prints Q as B&~C ^ A&~C, but the text
// lists NFT among the parity-preserving gates, and with that Q the gate is
// neither reversible nor parity preserving (for C = 0, P and Q are equal).
// This file follows the text and uses Q = ~B&C ^ A&~C, the form of the gate
// in the literature; the line is garbage in every circuit here, so sums and
// carries do not depend on the choice, only the parity of the garbage does.
// Combinational.
module nft_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a ^ b;
  assign q = (~b & c) ^ (a & ~c);
  assign r = (b & c) ^ (a & ~c);
endmodule
