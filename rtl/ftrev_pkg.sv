// ftrev_pkg -- constants shared by the fault tolerant reversible adders.
//
// Every circuit here is a netlist of parity-preserving reversible gates
// (MIG, F2G, NFT). A reversible gate has as many outputs as inputs, so each
// circuit needs constant-0 input lines and produces garbage outputs besides
// its sum and carry. The counts below size the garbage ports and are the
// figures of the published comparison table (per 1-bit full adder, per
// 4-bit carry-skip block, for the 2-bit carry look-ahead adder). The
// garbage of the ripple-carry adder is split into the propagate lines
// (which the carry-skip logic reuses) and two further lines per full adder.
// The adders also check at elaboration that data inputs plus constant
// inputs equal outputs plus garbage, as reversibility requires.
package ftrev_pkg;

  // Fault tolerant full adder (two MIG gates).
  localparam int unsigned FTFA_CONSTS   = 2;
  localparam int unsigned FTFA_GARBAGE  = 3;

  // Garbage lines of one full adder that are neither the propagate line
  // nor used by any later gate: G1 and G3.
  localparam int unsigned FTFA_SPARE    = 2;

  // 4-bit carry-skip block: 8 MIG + 4 NFT + 2 F2G = 14 gates.
  localparam int unsigned CSA_BITS      = 4;
  localparam int unsigned CSA_CONSTS    = 15;
  localparam int unsigned CSA_GARBAGE   = 19;

  // 2-bit carry look-ahead adder: 4 MIG + 10 F2G + 5 NFT = 19 gates.
  localparam int unsigned CLA_BITS      = 2;
  localparam int unsigned CLA_CONSTS    = 26;
  localparam int unsigned CLA_GARBAGE   = 28;

  // 16-bit high speed adder: four carry-skip blocks.
  localparam int unsigned HSA_BITS      = 16;

endpackage
