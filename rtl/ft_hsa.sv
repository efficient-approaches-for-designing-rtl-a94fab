// ft_hsa -- 16-bit high speed fault tolerant reversible adder (HSA).
//
// The operands are cut into NBLK fixed blocks of four bits. Each block is a
// ft_csa4: a 4-bit ripple carry adder plus carry-skip logic. The carry out
// of block k is the carry in of block k+1; the carry in of block 0 is c0
// and the carry out of the last block is cout. Each block brings out its 19
// garbage lines, block k on g[19k +: 19], so the whole adder has 60 constant
// inputs, 76 garbage outputs and 56 gates (32 MIG, 16 NFT, 8 F2G) at the
// default NBLK = 4. The block size is fixed at four by the carry-skip
// circuit; only the block count is a parameter. Combinational.
module ft_hsa
  import ftrev_pkg::*;
#(
  parameter int unsigned NBLK = HSA_BITS / CSA_BITS
) (
  input  logic [NBLK*CSA_BITS-1:0]    x,
  input  logic [NBLK*CSA_BITS-1:0]    y,
  input  logic                        c0,
  output logic [NBLK*CSA_BITS-1:0]    s,
  output logic                        cout,
  output logic [NBLK*CSA_GARBAGE-1:0] g
);
  logic [NBLK:0] c;

  assign c[0] = c0;

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    ft_csa4 u_blk (
      .x(x[k*CSA_BITS +: CSA_BITS]),
      .y(y[k*CSA_BITS +: CSA_BITS]),
      .c0(c[k]),
      .s(s[k*CSA_BITS +: CSA_BITS]),
      .cout(c[k+1]),
      .g(g[k*CSA_GARBAGE +: CSA_GARBAGE])
    );
  end

  assign cout = c[NBLK];
endmodule
