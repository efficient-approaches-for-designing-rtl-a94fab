// f2g_gate -- 3x3 Feynman double (F2G) reversible gate.
//
// Outputs:  P = A,  Q = A ^ B,  R = A ^ C.
// Parity preserving: A^B^C == P^Q^R. With B = C = 0 it is the fault
// tolerant way to copy a line three times, since fan-out of a wire is not
// allowed in a reversible circuit; with C = 0 and two mutually exclusive
// terms on A and B, Q is their OR, which the carry look-ahead adder uses to
// merge a generate and a propagate term. Combinational.
module f2g_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = a ^ b;
  assign r = a ^ c;
endmodule
