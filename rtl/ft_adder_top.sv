// ft_adder_top -- the proposed fault tolerant reversible adders side by side.
//
// The main unit is the 16-bit high speed adder (ft_hsa): four 4-bit
// carry-skip blocks, each a ripple carry adder of MIG-gate full adders. Next
// to it, sharing nothing, sits the 2-bit carry look-ahead adder (ft_cla2),
// the other fast adder proposed with it, which the 16-bit design does not
// use for its blocks because it costs more gates. Putting both behind one
// set of pins is this design's choice, made so that both can be reached;
// the published work describes each circuit separately.
//
// Every garbage line of both circuits is a port, so that the parity of all
// outputs can be compared with the parity of all inputs: in a
// parity-preserving circuit with constant-0 inputs, x^y^c0 reduced to one
// bit equals s^cout^g reduced to one bit, and any fault that flips a single
// line breaks that equality. Combinational, no clock.
module ft_adder_top
  import ftrev_pkg::*;
(
  // 16-bit high speed adder
  input  logic [HSA_BITS-1:0]                       x,
  input  logic [HSA_BITS-1:0]                       y,
  input  logic                                      c0,
  output logic [HSA_BITS-1:0]                       s,
  output logic                                      cout,
  output logic [(HSA_BITS/CSA_BITS)*CSA_GARBAGE-1:0] g,
  // 2-bit carry look-ahead adder
  input  logic [CLA_BITS-1:0]                       cla_x,
  input  logic [CLA_BITS-1:0]                       cla_y,
  input  logic                                      cla_c0,
  output logic [CLA_BITS-1:0]                       cla_s,
  output logic                                      cla_c2,
  output logic [CLA_GARBAGE-1:0]                    cla_g
);
  ft_hsa u_hsa (
    .x(x), .y(y), .c0(c0), .s(s), .cout(cout), .g(g)
  );

  ft_cla2 u_cla (
    .x(cla_x), .y(cla_y), .c0(cla_c0), .s(cla_s), .c2(cla_c2), .g(cla_g)
  );
endmodule
