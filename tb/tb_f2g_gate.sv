// tb_f2g_gate -- exhaustive self-checking test of the Feynman double gate.
//
// All 8 input vectors: outputs against the gate's equations, parity of
// inputs against parity of outputs, and distinct outputs (reversibility).
// With B = C = 0 all three outputs must be copies of A.
module tb_f2g_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  bit seen [8];

  f2g_gate dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: in=%b%b%b out=%b%b%b", what, a, b, c, p, q, r);
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
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check(p == a, "P");
      check(q == (a != b), "Q");
      check(r == (a != c), "R");
      check((a ^ b ^ c) == (p ^ q ^ r), "parity");
      check(!seen[{p, q, r}], "reversible");
      seen[{p, q, r}] = 1'b1;
      if (!b && !c) check(p == a && q == a && r == a, "copy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
