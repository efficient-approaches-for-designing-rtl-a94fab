// tb_nft_gate -- exhaustive self-checking test of the NFT gate.
//
// All 8 input vectors: outputs against the gate's equations, parity,
// distinct outputs (reversibility), and the AND use with A = 0: R = B & C.
module tb_nft_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  bit seen [8];

  nft_gate dut (.*);

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
      check(p == (a != b), "P");
      // R selects B when C = 1 and A when C = 0; Q selects ~B and A.
      check(r == (c ? b : a), "R");
      check(q == (c ? !b : a), "Q");
      check((a ^ b ^ c) == (p ^ q ^ r), "parity");
      check(!seen[{p, q, r}], "reversible");
      seen[{p, q, r}] = 1'b1;
      if (!a) check(r == (b && c), "AND");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
