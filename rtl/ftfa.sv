// ftfa -- fault tolerant reversible full adder (FTFA) of two MIG gates.
//
// The first MIG takes (A, B, 0, 0) and yields A, A^B, A&B and the garbage
// G1 = A&~B. The second MIG takes (A^B, Cin, A&B, A) and yields
//   P = A^B              -> G2 (the propagate term; carry-skip reuses it)
//   Q = A^B^Cin          -> Sum
//   R = (A^B)&Cin ^ A&B  -> Cout
//   S = (A^B)&~Cin ^ A   -> G3
// Two constant inputs and three garbage outputs, as in the published
// circuit; since both gates preserve parity, A^B^Cin == Sum^Cout^G1^G2^G3,
// so any single flipped line shows as a parity mismatch at the outputs.
// Which first-gate line feeds the fourth input of the second gate is not
// legible in the drawing; the one left over, A, is used here. Interface:
// the five lines of the block diagram (constants tied inside).
// Combinational.
module ftfa
  import ftrev_pkg::*;
(
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout,
  output logic g1,
  output logic g2,
  output logic g3
);
  logic m1_p, m1_q, m1_r;

  // A reversible circuit has as many output lines as input lines.
  if (3 + FTFA_CONSTS != 2 + FTFA_GARBAGE) begin : g_line_check
    $error("ftfa: line count does not balance");
  end

  mig_gate u_mig1 (
    .a(a), .b(b), .c(1'b0), .d(1'b0),
    .p(m1_p), .q(m1_q), .r(m1_r), .s(g1)
  );

  mig_gate u_mig2 (
    .a(m1_q), .b(cin), .c(m1_r), .d(m1_p),
    .p(g2), .q(sum), .r(cout), .s(g3)
  );
endmodule
