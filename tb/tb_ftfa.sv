// tb_ftfa -- exhaustive self-checking test of the fault tolerant full adder.
//
// For all 8 input vectors: {cout, sum} must equal a + b + cin, the garbage
// line G2 must be the propagate term a ^ b, G1 must be a & ~b, the parity of
// the five outputs must equal the parity of the inputs (the two constant
// inputs are 0), and the 8 output vectors must be distinct.
module tb_ftfa;
  import ftrev_pkg::*;
  logic a, b, cin, sum, cout, g1, g2, g3;
  int checks = 0, failures = 0;
  bit seen [32];

  ftfa dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b -> sum=%b cout=%b g=%b%b%b",
               what, a, b, cin, sum, cout, g1, g2, g3);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    check(3 + FTFA_CONSTS == 5 && FTFA_GARBAGE == 3, "line balance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      check({cout, sum} == 2'(a + b + cin), "sum");
      check(g2 == (a != b), "G2 propagate");
      check(g1 == (a && !b), "G1");
      check((a ^ b ^ cin) == (sum ^ cout ^ g1 ^ g2 ^ g3), "parity");
      check(!seen[{sum, cout, g1, g2, g3}], "injective");
      seen[{sum, cout, g1, g2, g3}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
