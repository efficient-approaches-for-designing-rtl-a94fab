// tb_ft_adder_top -- end-to-end test of both adders at their default sizes.
//
// Drives the 16-bit high speed adder and the 2-bit carry look-ahead adder
// with directed and random operands and checks, for every vector:
//   - the sums and carries against integer addition;
//   - fault-tolerance: the parity of all outputs of each adder (including
//     every garbage line) against the parity of its inputs, and that
//     flipping any single output line of the 16-bit adder would be seen as
//     a parity mismatch;
//   - for each 4-bit block, the skip term against arithmetic.
// Counts each mechanism of the design and fails if one never happened:
// a carry skip in each block, a carry rippling through all 16 bits, a
// carry out of the 16-bit adder, and the three look-ahead cases of the
// 2-bit adder (carry made in bit 0, c0 passed through bit 0, c0 passed
// through both bits).
module tb_ft_adder_top;
  import ftrev_pkg::*;
  localparam int unsigned NBLK = HSA_BITS / CSA_BITS;
  localparam int unsigned GW   = NBLK * CSA_GARBAGE;

  logic [HSA_BITS-1:0]    x, y, s;
  logic                   c0, cout;
  logic [GW-1:0]          g;
  logic [CLA_BITS-1:0]    cla_x, cla_y, cla_s;
  logic                   cla_c0, cla_c2;
  logic [CLA_GARBAGE-1:0] cla_g;

  int checks = 0, failures = 0;
  int skips [NBLK];
  int full_ripple = 0, carry_out = 0;
  int cla_gen0 = 0, cla_prop0 = 0, cla_prop01 = 0;

  ft_adder_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%h y=%h c0=%b s=%h cout=%b | cla x=%b y=%b c0=%b s=%b c2=%b",
               what, x, y, c0, s, cout, cla_x, cla_y, cla_c0, cla_s, cla_c2);
    end
  endtask

  task automatic apply(input logic [HSA_BITS-1:0] xa, input logic [HSA_BITS-1:0] ya,
                       input logic ca, input logic [2*CLA_BITS:0] cla_in);
    logic [HSA_BITS:0] full;
    logic              in_par, out_par;
    x = xa; y = ya; c0 = ca;
    {cla_x, cla_y, cla_c0} = cla_in;
    #1;
    // 16-bit adder
    full = (HSA_BITS + 1)'(x) + (HSA_BITS + 1)'(y) + (HSA_BITS + 1)'(c0);
    check({cout, s} == full, "hsa sum");
    in_par  = ^x ^ ^y ^ c0;
    out_par = ^s ^ cout ^ ^g;
    check(in_par == out_par, "hsa parity");
    // a single flipped output line must change the output parity
    begin
      logic [HSA_BITS+GW:0] outs, flipped;
      int i;
      outs    = {s, cout, g};
      i       = $urandom_range(HSA_BITS + GW);
      flipped = outs ^ ((HSA_BITS + GW + 1)'(1) << i);
      check((^flipped) != in_par, "single-line fault visible");
    end
    for (int k = 0; k < NBLK; k++) begin
      logic [HSA_BITS:0] mask, low;
      logic              skip_k;
      mask   = ((HSA_BITS + 1)'(1) << (CSA_BITS * k)) - 1;
      low    = ((HSA_BITS + 1)'(x) & mask) + ((HSA_BITS + 1)'(y) & mask) + (HSA_BITS + 1)'(c0);
      skip_k = low[CSA_BITS*k] && (((x ^ y) >> (CSA_BITS * k)) & 16'hF) == 16'hF;
      check((g[CSA_GARBAGE*k+17] ^ g[CSA_GARBAGE*k+18]) == skip_k, "block skip term");
      if (skip_k) skips[k]++;
    end
    if (c0 && &(x ^ y)) full_ripple++;
    if (cout) carry_out++;
    // 2-bit look-ahead adder
    check({cla_c2, cla_s} == 3'(cla_x + cla_y + cla_c0), "cla sum");
    check((^cla_x ^ ^cla_y ^ cla_c0) == (^cla_s ^ cla_c2 ^ ^cla_g), "cla parity");
    if (cla_x[0] && cla_y[0]) cla_gen0++;
    if (cla_c0 && (cla_x[0] != cla_y[0])) cla_prop0++;
    if (cla_c0 && &(cla_x ^ cla_y)) cla_prop01++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(16'h0000, 16'h0000, 1'b0, 5'b00_00_0);
    apply(16'hFFFF, 16'h0000, 1'b1, 5'b01_10_1);   // ripple through all bits
    apply(16'hFFFF, 16'hFFFF, 1'b1, 5'b11_11_1);
    apply(16'h1234, 16'hEDCB, 1'b1, 5'b01_01_0);
    for (int v = 0; v < 32; v++)
      apply(HSA_BITS'($urandom), HSA_BITS'($urandom), 1'($urandom), 5'(v));
    repeat (20000)
      apply(HSA_BITS'($urandom), HSA_BITS'($urandom), 1'($urandom), 5'($urandom));
    for (int k = 0; k < NBLK; k++) begin
      $display("block %0d carry skips: %0d", k, skips[k]);
      check(skips[k] > 0, "skip in every block");
    end
    $display("full 16-bit ripples: %0d, carry outs: %0d", full_ripple, carry_out);
    $display("cla: generate in bit0 %0d, c0 through bit0 %0d, c0 through both %0d",
             cla_gen0, cla_prop0, cla_prop01);
    check(full_ripple > 0, "full ripple seen");
    check(carry_out > 0, "carry out seen");
    check(cla_gen0 > 0 && cla_prop0 > 0 && cla_prop01 > 0, "cla look-ahead cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
