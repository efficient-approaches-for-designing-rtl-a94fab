// ft_csa4 -- 4-bit fault tolerant reversible carry-skip adder block.
//
// A 4-bit ripple carry adder (ft_rca) adds x and y. Its four propagate lines
// p[i] = x[i]^y[i] go through a tree of three NFT gates, each used as an AND
// (first input 0), to form P = p0&p1&p2&p3, and a fourth NFT forms the skip
// term c0&P. The carry in is copied by an F2G (c0, 0, 0): one copy feeds the
// ripple chain, one the skip AND, one is garbage. A last F2G takes
// (c4, c0&P, 0) and gives the block carry out on its P output.
//
// Gate use follows the published 4-bit carry-skip circuit: 8 MIG (four full
// adders), 4 NFT, 2 F2G = 14 gates, 15 constant inputs, 19 garbage outputs,
// numbered g[0..18] as there: g[2i], g[2i+1] from full adder i; g[8] from
// the carry-in copy; g[9..16] the P and Q lines of the NFTs on p0&p1,
// p0&p1&p2&p3 (g[11], g[12]), p2&p3 (g[13], g[14]) and the skip AND
// (g[15], g[16]); g[17] = c4 ^ c0&P and g[18] = c4 from the output F2G.
//
// The drawing names the output of the last F2G "c4" and does not show which
// of its three outputs that is. Here it is the pass-through output A = c4:
// the XOR output c4 ^ c0&P would be wrong whenever every bit propagates and
// c0 = 1 (then c4 = c0 and the XOR gives 0). As a Boolean function the block
// carry out therefore equals the ripple carry, and the skip term appears
// only in g[17]; the skip path is there for the gate count and for the
// delay argument, which a zero-delay RTL model does not show.
// Combinational.
module ft_csa4
  import ftrev_pkg::*;
(
  input  logic [CSA_BITS-1:0]    x,
  input  logic [CSA_BITS-1:0]    y,
  input  logic                   c0,
  output logic [CSA_BITS-1:0]    s,
  output logic                   cout,
  output logic [CSA_GARBAGE-1:0] g
);
  logic c0_rca, c0_skip;
  logic c4;
  logic [CSA_BITS-1:0] p;
  logic p01, p23, p0123, skip;

  // A reversible circuit has as many output lines as input lines.
  if (2 * CSA_BITS + 1 + CSA_CONSTS != CSA_BITS + 1 + CSA_GARBAGE) begin : g_line_check
    $error("ft_csa4: line count does not balance");
  end

  // Fault tolerant copy of the block carry in.
  f2g_gate u_cin_copy (
    .a(c0), .b(1'b0), .c(1'b0),
    .p(c0_rca), .q(g[8]), .r(c0_skip)
  );

  ft_rca #(.N(CSA_BITS)) u_rca (
    .x(x), .y(y), .c0(c0_rca),
    .s(s), .cout(c4), .p(p), .g(g[7:0])
  );

  // Block propagate P = p0 & p1 & p2 & p3.
  nft_gate u_and01 (
    .a(1'b0), .b(p[0]), .c(p[1]),
    .p(g[9]), .q(g[10]), .r(p01)
  );

  nft_gate u_and23 (
    .a(1'b0), .b(p[2]), .c(p[3]),
    .p(g[13]), .q(g[14]), .r(p23)
  );

  nft_gate u_and0123 (
    .a(1'b0), .b(p01), .c(p23),
    .p(g[11]), .q(g[12]), .r(p0123)
  );

  // Skip term c0 & P.
  nft_gate u_skip (
    .a(1'b0), .b(c0_skip), .c(p0123),
    .p(g[15]), .q(g[16]), .r(skip)
  );

  // Output gate: (c4, c0&P, 0) -> carry out on P.
  f2g_gate u_cout (
    .a(c4), .b(skip), .c(1'b0),
    .p(cout), .q(g[17]), .r(g[18])
  );
endmodule
