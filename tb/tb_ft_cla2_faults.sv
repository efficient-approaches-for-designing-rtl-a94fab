// tb_ft_cla2_faults -- single-line fault injection into the 2-bit carry
// look-ahead adder.
//
// Every line between two gates of ft_cla2 (the F2G copies of c0, x, y, p1
// and c0&p0, the propagate and generate terms, the look-ahead products and
// carries, and the wires inside both full adders) is, in turn, flipped and
// held stuck at 0 and at 1, for all 32 input vectors. A flipped line must
// make the parity of all outputs (sum, carry out, 28 garbage lines)
// disagree with the parity of the inputs; a stuck line must either leave
// every output unchanged or be caught the same way. This is the single-
// fault detection property that parity-preserving gates give the circuit.
module tb_ft_cla2_faults;
  import ftrev_pkg::*;
  localparam int NLINES = 30;

  logic [CLA_BITS-1:0]    x, y, s;
  logic                   c0, c2;
  logic [CLA_GARBAGE-1:0] g;
  logic                   fv;          // value forced onto the faulty line
  int checks = 0, failures = 0, caught_wrong = 0;

  ft_cla2 dut (.*);

  task automatic check(input bit ok, input string what, input int line);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: line %0d x=%b y=%b c0=%b", what, line, x, y, c0);
    end
  endtask

  // Read the fault-free value of internal line n.
  function automatic logic line_value(input int n);
    case (n)
      0:       return dut.c0_a;
      1:       return dut.c0_b;
      2:       return dut.x0_a;
      3:       return dut.x0_b;
      4:       return dut.y0_a;
      5:       return dut.y0_b;
      6:       return dut.x1_a;
      7:       return dut.x1_b;
      8:       return dut.y1_a;
      9:       return dut.y1_b;
      10:      return dut.p0;
      11:      return dut.p1;
      12:      return dut.p1_a;
      13:      return dut.p1_b;
      14:      return dut.g0t;
      15:      return dut.g1t;
      16:      return dut.c0p0;
      17:      return dut.c0p0_a;
      18:      return dut.c0p0_b;
      19:      return dut.c1;
      20:      return dut.g0t_fwd;
      21:      return dut.g0p1;
      22:      return dut.c0p0p1;
      23:      return dut.p1c1;
      24:      return dut.u_fa0.m1_p;
      25:      return dut.u_fa0.m1_q;
      26:      return dut.u_fa0.m1_r;
      27:      return dut.u_fa1.m1_p;
      28:      return dut.u_fa1.m1_q;
      default: return dut.u_fa1.m1_r;
    endcase
  endfunction

  // Hold internal line n at the value of fv, or let it go.
  task automatic inject(input int n, input bit on);
    if (on) begin
      case (n)
        0:       force dut.c0_a = fv;
        1:       force dut.c0_b = fv;
        2:       force dut.x0_a = fv;
        3:       force dut.x0_b = fv;
        4:       force dut.y0_a = fv;
        5:       force dut.y0_b = fv;
        6:       force dut.x1_a = fv;
        7:       force dut.x1_b = fv;
        8:       force dut.y1_a = fv;
        9:       force dut.y1_b = fv;
        10:      force dut.p0 = fv;
        11:      force dut.p1 = fv;
        12:      force dut.p1_a = fv;
        13:      force dut.p1_b = fv;
        14:      force dut.g0t = fv;
        15:      force dut.g1t = fv;
        16:      force dut.c0p0 = fv;
        17:      force dut.c0p0_a = fv;
        18:      force dut.c0p0_b = fv;
        19:      force dut.c1 = fv;
        20:      force dut.g0t_fwd = fv;
        21:      force dut.g0p1 = fv;
        22:      force dut.c0p0p1 = fv;
        23:      force dut.p1c1 = fv;
        24:      force dut.u_fa0.m1_p = fv;
        25:      force dut.u_fa0.m1_q = fv;
        26:      force dut.u_fa0.m1_r = fv;
        27:      force dut.u_fa1.m1_p = fv;
        28:      force dut.u_fa1.m1_q = fv;
        default: force dut.u_fa1.m1_r = fv;
      endcase
    end else begin
      case (n)
        0:       release dut.c0_a;
        1:       release dut.c0_b;
        2:       release dut.x0_a;
        3:       release dut.x0_b;
        4:       release dut.y0_a;
        5:       release dut.y0_b;
        6:       release dut.x1_a;
        7:       release dut.x1_b;
        8:       release dut.y1_a;
        9:       release dut.y1_b;
        10:      release dut.p0;
        11:      release dut.p1;
        12:      release dut.p1_a;
        13:      release dut.p1_b;
        14:      release dut.g0t;
        15:      release dut.g1t;
        16:      release dut.c0p0;
        17:      release dut.c0p0_a;
        18:      release dut.c0p0_b;
        19:      release dut.c1;
        20:      release dut.g0t_fwd;
        21:      release dut.g0p1;
        22:      release dut.c0p0p1;
        23:      release dut.p1c1;
        24:      release dut.u_fa0.m1_p;
        25:      release dut.u_fa0.m1_q;
        26:      release dut.u_fa0.m1_r;
        27:      release dut.u_fa1.m1_p;
        28:      release dut.u_fa1.m1_q;
        default: release dut.u_fa1.m1_r;
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
      for (int v = 0; v < 32; v++) begin
        logic [CLA_BITS+CLA_GARBAGE:0] good;
        logic                          in_par, ok_val;
        {x, y, c0} = 5'(v);
        #1;
        good   = {s, c2, g};
        in_par = ^x ^ ^y ^ c0;
        ok_val = line_value(n);
        check((^good) == in_par, "fault-free parity", n);
        check({c2, s} == 3'(x + y + c0), "fault-free sum", n);
        fv = ~ok_val;
        inject(n, 1'b1);
        #1;
        check((^{s, c2, g}) != in_par, "flip not detected", n);
        for (int sv = 0; sv < 2; sv++) begin
          fv = 1'(sv);
          #1;
          if ({s, c2, g} != good) begin
            check((^{s, c2, g}) != in_par, "stuck-at not detected", n);
            if ({c2, s} != 3'(x + y + c0)) caught_wrong++;
          end
        end
        inject(n, 1'b0);
        #1;
      end
    end
    check(caught_wrong > 0, "some stuck-at faults corrupted the sum", 0);
    $display("lines=%0d wrong sums caught by parity=%0d", NLINES, caught_wrong);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
