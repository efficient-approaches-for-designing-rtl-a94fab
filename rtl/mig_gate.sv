// mig_gate -- 4x4 modified IG (MIG) reversible gate.
//
// Outputs:  P = A,  Q = A ^ B,  R = A&B ^ C,  S = A&~B ^ D.
// The first three outputs are those of a Peres gate; the fourth makes the
// gate parity preserving (A^B^C^D == P^Q^R^S) and reversible. With C = D = 0
// it gives the half-adder terms A^B and A&B plus garbage A&~B, which is how
// the full adder uses it. The equations are the ones printed for the gate;
// the gate is purely combinational, no clock, no reset.
module mig_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  assign p = a;
  assign q = a ^ b;
  assign r = (a & b) ^ c;
  assign s = (a & ~b) ^ d;
endmodule
