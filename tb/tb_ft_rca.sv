// tb_ft_rca -- exhaustive self-checking test of the 4-bit ripple carry adder.
//
// All 512 combinations of x, y and c0: {cout, s} against x + y + c0, the
// propagate lines against x ^ y, each stage's G1 line against x & ~y, and
// the parity of all outputs (sum, carry, propagate and garbage lines)
// against the parity of x, y and c0. Counts how often a carry entering at
// c0 rippled through all four stages.
module tb_ft_rca;
  localparam int unsigned N = 4;   // the adder's default width
  logic [N-1:0]   x, y, s, p;
  logic           c0, cout;
  logic [2*N-1:0] g;
  int checks = 0, failures = 0, full_ripple = 0;

  ft_rca dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: x=%h y=%h c0=%b -> s=%h cout=%b p=%h g=%h",
               what, x, y, c0, s, cout, p, g);
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
    for (int v = 0; v < (1 << (2 * N + 1)); v++) begin
      {x, y, c0} = (2 * N + 1)'(v);
      #1;
      check({cout, s} == (N + 1)'(x + y + c0), "sum");
      check(p == (x ^ y), "propagate");
      for (int i = 0; i < N; i++) check(g[2*i] == (x[i] && !y[i]), "G1");
      check((^x ^ ^y ^ c0) == (^s ^ cout ^ ^p ^ ^g), "parity");
      if (c0 && &(x ^ y)) begin
        full_ripple++;
        check(cout == 1'b1, "ripple through");
      end
    end
    check(full_ripple > 0, "full ripple seen");
    $display("full-length ripples: %0d", full_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
