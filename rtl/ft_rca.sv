// ft_rca -- N-bit fault tolerant reversible ripple carry adder.
//
// N full adders (ftfa) in a chain: the carry out of stage i is the carry in
// of stage i+1. Each stage's three garbage lines come out: the propagate
// line x[i]^y[i] on p[i], and its other two garbage lines on g[2i] (G1) and
// g[2i+1] (G3). Used alone the adder has 2N constant inputs and 3N garbage
// outputs (p and g together); the carry-skip block takes p as its propagate
// terms. The default N = 4 is the size used by the carry-skip block.
// Combinational; the carry ripples through N stages.
module ft_rca
  import ftrev_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  input  logic           c0,
  output logic [N-1:0]   s,
  output logic           cout,
  output logic [N-1:0]   p,
  output logic [FTFA_SPARE*N-1:0] g
);
  logic [N:0] c;

  assign c[0] = c0;

  for (genvar i = 0; i < N; i++) begin : g_stage
    ftfa u_fa (
      .a(x[i]), .b(y[i]), .cin(c[i]),
      .sum(s[i]), .cout(c[i+1]),
      .g1(g[2*i]), .g2(p[i]), .g3(g[2*i+1])
    );
  end

  assign cout = c[N];
endmodule
