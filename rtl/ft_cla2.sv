// ft_cla2 -- 2-bit fault tolerant reversible carry look-ahead adder.
//
// The carries are formed from generate and propagate terms instead of the
// full adders' own carry outputs:
//   c1 = x0&y0 ^ c0&p0               (the two terms never both hold)
//   c2 = x1&y1 ^ p1&(x0&y0 ^ c0&p0) = x1&y1 ^ (x0&y0&p1 ^ c0&p0&p1)
// with p_i = x_i ^ y_i taken from each full adder's G2 line. No line fans
// out: every value used twice or three times is copied by an F2G with two
// constant-0 inputs. Products are NFT gates used as AND (first input 0) and
// the XOR merges are F2G gates with third input 0.
//
// Netlist as published: 2 FTFA (4 MIG), 10 F2G, 5 NFT = 19 gates, 26
// constant inputs, 28 garbage outputs g[0..27], numbered as in the drawing:
//   g0  c0 copy          g1  y0 copy          g7  x0 copy
//   g2,g3  FTFA0 G1,G3   g4  FTFA0 carry out (unused)
//   g5,g6  NFT c0&p0     g8,g9  NFT x0&y0     g10  c1-merge F2G spare
//   g11 c0&p0 copy       g12,g13 NFT c0&p0&p1 g14 y1 copy
//   g15,g16 FTFA1 G1,G3  g17 FTFA1 carry out  g18 p1 copy   g19 x1 copy
//   g20,g21 NFT x1&y1    g22,g23 NFT x0&y0&p1 g24,g25 p1&c1-merge F2G spares
//   g26,g27 output F2G spares
// The assignment of garbage labels among the two spare lines of one gate
// is this design's choice; the drawing only fixes which gate each comes
// from. Combinational.
module ft_cla2
  import ftrev_pkg::*;
(
  input  logic [CLA_BITS-1:0]    x,
  input  logic [CLA_BITS-1:0]    y,
  input  logic                   c0,
  output logic [CLA_BITS-1:0]    s,
  output logic                   c2,
  output logic [CLA_GARBAGE-1:0] g
);
  // copies made by F2G fan-out gates
  logic c0_a, c0_b, x0_a, x0_b, y0_a, y0_b, x1_a, x1_b, y1_a, y1_b;
  logic p0, p1, p1_a, p1_b;
  logic g0t, g1t;                 // generate terms x0&y0, x1&y1
  logic c0p0, c0p0_a, c0p0_b;
  logic c1, g0t_fwd;
  logic g0p1, c0p0p1, p1c1;

  // A reversible circuit has as many output lines as input lines.
  if (2 * CLA_BITS + 1 + CLA_CONSTS != CLA_BITS + 1 + CLA_GARBAGE) begin : g_line_check
    $error("ft_cla2: line count does not balance");
  end

  // ---- bit 0 ----
  f2g_gate u_cp_c0 (.a(c0),   .b(1'b0), .c(1'b0), .p(c0_a), .q(g[0]),  .r(c0_b));
  f2g_gate u_cp_y0 (.a(y[0]), .b(1'b0), .c(1'b0), .p(y0_a), .q(g[1]),  .r(y0_b));
  f2g_gate u_cp_x0 (.a(x[0]), .b(1'b0), .c(1'b0), .p(x0_a), .q(g[7]),  .r(x0_b));

  nft_gate u_g0 (.a(1'b0), .b(x0_b), .c(y0_b), .p(g[8]), .q(g[9]), .r(g0t));

  ftfa u_fa0 (
    .a(x0_a), .b(y0_a), .cin(c0_a),
    .sum(s[0]), .cout(g[4]), .g1(g[2]), .g2(p0), .g3(g[3])
  );

  nft_gate u_c0p0 (.a(1'b0), .b(p0), .c(c0_b), .p(g[5]), .q(g[6]), .r(c0p0));

  f2g_gate u_cp_c0p0 (.a(c0p0), .b(1'b0), .c(1'b0), .p(c0p0_a), .q(g[11]), .r(c0p0_b));

  // c1 = x0&y0 ^ c0&p0; P keeps x0&y0 for the bit-1 look-ahead term.
  f2g_gate u_c1 (.a(g0t), .b(c0p0_a), .c(1'b0), .p(g0t_fwd), .q(c1), .r(g[10]));

  // ---- bit 1 ----
  f2g_gate u_cp_y1 (.a(y[1]), .b(1'b0), .c(1'b0), .p(y1_a), .q(g[14]), .r(y1_b));
  f2g_gate u_cp_x1 (.a(x[1]), .b(1'b0), .c(1'b0), .p(x1_a), .q(g[19]), .r(x1_b));

  nft_gate u_g1 (.a(1'b0), .b(x1_b), .c(y1_b), .p(g[20]), .q(g[21]), .r(g1t));

  ftfa u_fa1 (
    .a(x1_a), .b(y1_a), .cin(c1),
    .sum(s[1]), .cout(g[17]), .g1(g[15]), .g2(p1), .g3(g[16])
  );

  f2g_gate u_cp_p1 (.a(p1), .b(1'b0), .c(1'b0), .p(p1_a), .q(g[18]), .r(p1_b));

  nft_gate u_g0p1   (.a(1'b0), .b(g0t_fwd), .c(p1_a), .p(g[22]), .q(g[23]), .r(g0p1));
  nft_gate u_c0p0p1 (.a(1'b0), .b(c0p0_b),  .c(p1_b), .p(g[12]), .q(g[13]), .r(c0p0p1));

  // p1&c1 = x0&y0&p1 ^ c0&p0&p1
  f2g_gate u_p1c1 (.a(g0p1), .b(c0p0p1), .c(1'b0), .p(g[24]), .q(p1c1), .r(g[25]));

  // c2 = x1&y1 ^ p1&c1
  f2g_gate u_c2 (.a(g1t), .b(p1c1), .c(1'b0), .p(g[26]), .q(c2), .r(g[27]));
endmodule
