// tb_ft_csa4 -- exhaustive self-checking test of the 4-bit carry-skip block.
//
// All 512 combinations of x, y and c0. Checks {cout, s} against x + y + c0,
// the skip term c0 & (all four bits propagate), which the output F2G leaves
// as g[17] ^ g[18], the block propagate AND p0&p1&p2&p3 on the middle NFT,
// the carry-in copy g[8] and the parity of all 24 outputs against the
// parity of the 9 inputs. Counts how often the skip term was 1.
module tb_ft_csa4;
  import ftrev_pkg::*;
  logic [CSA_BITS-1:0]    x, y, s;
  logic                   c0, cout;
  logic [CSA_GARBAGE-1:0] g;
  int checks = 0, failures = 0, skips = 0, generates = 0;

  ft_csa4 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%h y=%h c0=%b -> s=%h cout=%b g=%h",
               what, x, y, c0, s, cout, g);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      logic prop_all, skip;
      {x, y, c0} = 9'(v);
      #1;
      prop_all = &(x ^ y);
      skip     = c0 && prop_all;
      check({cout, s} == 5'(x + y + c0), "sum");
      check((g[17] ^ g[18]) == skip, "skip term");
      check(g[18] == cout, "carry copy");
      check(g[8] == c0, "carry-in copy");
      check((^x ^ ^y ^ c0) == (^s ^ cout ^ ^g), "parity");
      if (skip) skips++;
      if (cout && !c0) generates++;
    end
    // reversible: inputs plus constant lines equal outputs plus garbage
    check($bits(x) + $bits(y) + $bits(c0) + CSA_CONSTS
          == $bits(s) + $bits(cout) + $bits(g), "line balance");
    check(skips > 0, "skip seen");
    check(generates > 0, "carry generated inside block");
    $display("skips=%0d generated carries=%0d", skips, generates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
