// tb_ft_cla2 -- exhaustive self-checking test of the 2-bit carry look-ahead
// adder.
//
// All 32 combinations of x, y and c0: {c2, s} against x + y + c0; the
// unused ripple carries of the two full adders (g[4], g[17]) must agree
// with the look-ahead carries c1 and c2; parity of all 31 outputs against
// the parity of the 5 inputs; and the 32 output vectors must be distinct.
// Counts the look-ahead cases: carry made in bit 0, carry passed from c0
// through bit 0, and carry passed from c0 through both bits.
module tb_ft_cla2;
  import ftrev_pkg::*;
  logic [CLA_BITS-1:0]    x, y, s;
  logic                   c0, c2;
  logic [CLA_GARBAGE-1:0] g;
  int checks = 0, failures = 0;
  int gen0 = 0, prop0 = 0, prop01 = 0;
  logic [CLA_BITS+CLA_GARBAGE:0] outs [$];

  ft_cla2 dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%b y=%b c0=%b -> s=%b c2=%b g=%h",
               what, x, y, c0, s, c2, g);
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
    for (int v = 0; v < 32; v++) begin
      logic c1;
      {x, y, c0} = 5'(v);
      #1;
      c1 = (x[0] + y[0] + c0) > 1;
      check({c2, s} == 3'(x + y + c0), "sum");
      check(g[4] == c1, "c1 look-ahead");
      check(g[17] == c2, "c2 look-ahead");
      check((^x ^ ^y ^ c0) == (^s ^ c2 ^ ^g), "parity");
      foreach (outs[k]) check(outs[k] != {s, c2, g}, "injective");
      outs.push_back({s, c2, g});
      if (x[0] && y[0]) gen0++;
      if (c0 && (x[0] != y[0])) prop0++;
      if (c0 && (x[0] != y[0]) && (x[1] != y[1])) prop01++;
    end
    // reversible: inputs plus constant lines equal outputs plus garbage
    check($bits(x) + $bits(y) + $bits(c0) + CLA_CONSTS
          == $bits(s) + $bits(c2) + $bits(g), "line balance");
    check(gen0 > 0 && prop0 > 0 && prop01 > 0, "look-ahead cases seen");
    $display("generate0=%0d c0-through-bit0=%0d c0-through-both=%0d", gen0, prop0, prop01);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
