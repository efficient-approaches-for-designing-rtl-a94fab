// tb_ft_csa4_faults -- single-line fault injection into the 4-bit
// carry-skip block.
//
// The claim behind building adders from parity-preserving gates is that a
// fault on any one line, anywhere in the circuit, shows at the outputs as a
// parity mismatch: ^inputs != ^(sum, carry out, all garbage). This test
// checks it for every internal line between gates of ft_csa4 (the carry-in
// copies, the ripple carries, the propagate lines, the wires inside each
// full adder, the AND tree and the skip term) and for all 512 input
// vectors:
//   - line flipped (forced to the complement of its fault-free value): the
//     output parity must disagree with the input parity;
//   - line stuck at 0 and stuck at 1: either every output equals the
//     fault-free one, or the parity disagrees -- a wrong sum or carry must
//     never come with matching parity.
// Counts how many stuck-at cases produced a wrong sum and were caught.
module tb_ft_csa4_faults;
  import ftrev_pkg::*;
  localparam int NLINES = 26;

  logic [CSA_BITS-1:0]    x, y, s;
  logic                   c0, cout;
  logic [CSA_GARBAGE-1:0] g;
  logic                   fv;          // value forced onto the faulty line
  int checks = 0, failures = 0, caught_wrong = 0, flips = 0;

  ft_csa4 dut (.*);

  task automatic check(input bit ok, input string what, input int line);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: line %0d x=%h y=%h c0=%b", what, line, x, y, c0);
    end
  endtask

  // Read the fault-free value of internal line n.
  function automatic logic line_value(input int n);
    case (n)
      0:  return dut.c0_rca;
      1:  return dut.c0_skip;
      2:  return dut.u_rca.c[1];
      3:  return dut.u_rca.c[2];
      4:  return dut.u_rca.c[3];
      5:  return dut.c4;
      6:  return dut.p[0];
      7:  return dut.p[1];
      8:  return dut.p[2];
      9:  return dut.p[3];
      10: return dut.p01;
      11: return dut.p23;
      12: return dut.p0123;
      13: return dut.skip;
      14: return dut.u_rca.g_stage[0].u_fa.m1_p;
      15: return dut.u_rca.g_stage[0].u_fa.m1_q;
      16: return dut.u_rca.g_stage[0].u_fa.m1_r;
      17: return dut.u_rca.g_stage[1].u_fa.m1_p;
      18: return dut.u_rca.g_stage[1].u_fa.m1_q;
      19: return dut.u_rca.g_stage[1].u_fa.m1_r;
      20: return dut.u_rca.g_stage[2].u_fa.m1_p;
      21: return dut.u_rca.g_stage[2].u_fa.m1_q;
      22: return dut.u_rca.g_stage[2].u_fa.m1_r;
      23: return dut.u_rca.g_stage[3].u_fa.m1_p;
      24: return dut.u_rca.g_stage[3].u_fa.m1_q;
      default: return dut.u_rca.g_stage[3].u_fa.m1_r;
    endcase
  endfunction

  // Hold internal line n at the value of fv, or let it go.
  task automatic inject(input int n, input bit on);
    if (on) begin
      case (n)
        0:  force dut.c0_rca = fv;
        1:  force dut.c0_skip = fv;
        2:  force dut.u_rca.c[1] = fv;
        3:  force dut.u_rca.c[2] = fv;
        4:  force dut.u_rca.c[3] = fv;
        5:  force dut.c4 = fv;
        6:  force dut.p[0] = fv;
        7:  force dut.p[1] = fv;
        8:  force dut.p[2] = fv;
        9:  force dut.p[3] = fv;
        10: force dut.p01 = fv;
        11: force dut.p23 = fv;
        12: force dut.p0123 = fv;
        13: force dut.skip = fv;
        14: force dut.u_rca.g_stage[0].u_fa.m1_p = fv;
        15: force dut.u_rca.g_stage[0].u_fa.m1_q = fv;
        16: force dut.u_rca.g_stage[0].u_fa.m1_r = fv;
        17: force dut.u_rca.g_stage[1].u_fa.m1_p = fv;
        18: force dut.u_rca.g_stage[1].u_fa.m1_q = fv;
        19: force dut.u_rca.g_stage[1].u_fa.m1_r = fv;
        20: force dut.u_rca.g_stage[2].u_fa.m1_p = fv;
        21: force dut.u_rca.g_stage[2].u_fa.m1_q = fv;
        22: force dut.u_rca.g_stage[2].u_fa.m1_r = fv;
        23: force dut.u_rca.g_stage[3].u_fa.m1_p = fv;
        24: force dut.u_rca.g_stage[3].u_fa.m1_q = fv;
        default: force dut.u_rca.g_stage[3].u_fa.m1_r = fv;
      endcase
    end else begin
      case (n)
        0:  release dut.c0_rca;
        1:  release dut.c0_skip;
        2:  release dut.u_rca.c[1];
        3:  release dut.u_rca.c[2];
        4:  release dut.u_rca.c[3];
        5:  release dut.c4;
        6:  release dut.p[0];
        7:  release dut.p[1];
        8:  release dut.p[2];
        9:  release dut.p[3];
        10: release dut.p01;
        11: release dut.p23;
        12: release dut.p0123;
        13: release dut.skip;
        14: release dut.u_rca.g_stage[0].u_fa.m1_p;
        15: release dut.u_rca.g_stage[0].u_fa.m1_q;
        16: release dut.u_rca.g_stage[0].u_fa.m1_r;
        17: release dut.u_rca.g_stage[1].u_fa.m1_p;
        18: release dut.u_rca.g_stage[1].u_fa.m1_q;
        19: release dut.u_rca.g_stage[1].u_fa.m1_r;
        20: release dut.u_rca.g_stage[2].u_fa.m1_p;
        21: release dut.u_rca.g_stage[2].u_fa.m1_q;
        22: release dut.u_rca.g_stage[2].u_fa.m1_r;
        23: release dut.u_rca.g_stage[3].u_fa.m1_p;
        24: release dut.u_rca.g_stage[3].u_fa.m1_q;
        default: release dut.u_rca.g_stage[3].u_fa.m1_r;
      endcase
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NLINES; n++) begin
      for (int v = 0; v < 512; v++) begin
        logic [CSA_BITS+CSA_GARBAGE:0] good;
        logic                          in_par, ok_val;
        {x, y, c0} = 9'(v);
        #1;
        good   = {s, cout, g};
        in_par = ^x ^ ^y ^ c0;
        ok_val = line_value(n);
        check((^good) == in_par, "fault-free parity", n);
        check({cout, s} == 5'(x + y + c0), "fault-free sum", n);
        // flipped line
        fv = ~ok_val;
        inject(n, 1'b1);
        #1;
        check((^{s, cout, g}) != in_par, "flip not detected", n);
        flips++;
        // stuck at 0, then stuck at 1
        for (int sv = 0; sv < 2; sv++) begin
          fv = 1'(sv);
          #1;
          if ({s, cout, g} != good) begin
            check((^{s, cout, g}) != in_par, "stuck-at not detected", n);
            if ({cout, s} != 5'(x + y + c0)) caught_wrong++;
          end
        end
        inject(n, 1'b0);
        #1;
      end
    end
    check(caught_wrong > 0, "some stuck-at faults corrupted the sum", 0);
    $display("lines=%0d flips=%0d wrong sums caught by parity=%0d", NLINES, flips, caught_wrong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
