// tb_ft_hsa -- self-checking test of the 16-bit high speed adder.
//
// Directed vectors (zero, all-ones plus carry, every block propagating,
// one block propagating at a time) followed by 20000 random ones. For each
// vector: {cout, s} against x + y + c0; for every block k, the skip term
// left in that block's garbage (g[19k+17] ^ g[19k+18]) against the carry
// into block k, worked out by arithmetic on the lower bits, ANDed with the
// block's all-propagate condition; and the parity of all 93 outputs
// against the parity of the 33 inputs. Counts skips per block and carries
// out of the full adder.
module tb_ft_hsa;
  import ftrev_pkg::*;
  localparam int unsigned NBLK = HSA_BITS / CSA_BITS;
  localparam int unsigned W    = NBLK * CSA_BITS;
  logic [W-1:0]               x, y, s;
  logic                       c0, cout;
  logic [NBLK*CSA_GARBAGE-1:0] g;
  int checks = 0, failures = 0, overflows = 0;
  int skips [NBLK];

  ft_hsa dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%h y=%h c0=%b -> s=%h cout=%b", what, x, y, c0, s, cout);
    end
  endtask

  task automatic apply(input logic [W-1:0] xa, input logic [W-1:0] ya, input logic ca);
    logic [W:0] full;
    x = xa; y = ya; c0 = ca;
    #1;
    full = (W + 1)'(x) + (W + 1)'(y) + (W + 1)'(c0);
    check({cout, s} == full, "sum");
    check((^x ^ ^y ^ c0) == (^s ^ cout ^ ^g), "parity");
    for (int k = 0; k < NBLK; k++) begin
      logic [W:0] low;
      logic       cin_k, prop_k, skip_k;
      // carry into block k: bit CSA_BITS*k of the sum of the lower bits
      low    = ((W + 1)'(x) & (((W + 1)'(1) << (CSA_BITS * k)) - 1))
             + ((W + 1)'(y) & (((W + 1)'(1) << (CSA_BITS * k)) - 1))
             + (W + 1)'(c0);
      cin_k  = low[CSA_BITS*k];
      prop_k = (((x ^ y) >> (CSA_BITS * k)) & W'(4'hF)) == W'(4'hF);
      skip_k = cin_k && prop_k;
      check((g[CSA_GARBAGE*k+17] ^ g[CSA_GARBAGE*k+18]) == skip_k, "block skip term");
      if (skip_k) skips[k]++;
    end
    if (cout) overflows++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply('0, '0, 1'b0);
    apply('1, '0, 1'b1);
    apply(16'hAAAA, 16'h5555, 1'b1);
    apply(16'hFFFF, 16'hFFFF, 1'b1);
    for (int k = 0; k < NBLK; k++) begin
      // block k propagates, the blocks below it hand it a carry
      apply(W'(16'h000F) << (CSA_BITS * k) | W'((1 << (CSA_BITS * k)) - 1),
            W'(0), 1'b1);
    end
    repeat (20000) apply(W'($urandom), W'($urandom), 1'($urandom));
    for (int k = 0; k < NBLK; k++) begin
      check(skips[k] > 0, "skip seen in every block");
      $display("block %0d skips=%0d", k, skips[k]);
    end
    check(overflows > 0, "carry out seen");
    $display("carry outs=%0d", overflows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
