// tb_mig_gate -- exhaustive self-checking test of the MIG gate.
//
// Applies all 16 input vectors and checks each output against the gate's
// equations, checks that input and output parity agree, and checks that
// the 16 output vectors are all different (the gate is reversible).
module tb_mig_gate;
  logic a, b, c, d, p, q, r, s;
  int checks = 0, failures = 0;
  bit seen [16];

  mig_gate dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: in=%b%b%b%b out=%b%b%b%b", what, a, b, c, d, p, q, r, s);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check(p == a, "P");
      check(q == (a != b), "Q");
      check(r == ((a && b) != c), "R");
      check(s == ((a && !b) != d), "S");
      check((a ^ b ^ c ^ d) == (p ^ q ^ r ^ s), "parity");
      check(!seen[{p, q, r, s}], "reversible");
      seen[{p, q, r, s}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
