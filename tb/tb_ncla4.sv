// tb_ncla4: exhaustive check of the 4-bit NCLA adder. All 512 combinations
// of a, b and cin are applied; {cout, s} must equal the integer a + b + cin.
// It also counts how often each look-ahead carry term is the one that sets
// C4 alone (generate in bit 3, 2 or 1, or cin propagated through all three
// bits), and fails if a term is never exercised.
module tb_ncla4;
  import bcd_pkg::*;

  int checks = 0, failures = 0;
  int sum;
  logic [2:0] g, p;
  bcd_digit_t a, b, s;
  logic cin, cout;
  int n_g3 = 0, n_p3g2 = 0, n_p3p2g1 = 0, n_p3p2p1c1 = 0;

  ncla4 dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    for (int v = 0; v < 512; v++) begin
      {cin, a, b} = v[8:0];
      #1;
      sum = int'(a) + int'(b) + int'(cin);
      checks++;
      if ({cout, s} !== sum[4:0]) begin
        failures++;
        $display("FAIL %0d + %0d + %0d = %0d, got %0d", a, b, cin, sum, {cout, s});
      end
      g = a[2:0] & b[2:0];
      p = a[2:0] ^ b[2:0];
      if (g[2])                               n_g3++;
      else if (p[2] && g[1])                  n_p3g2++;
      else if (p[2] && p[1] && g[0])          n_p3p2g1++;
      else if (p[2] && p[1] && p[0] && cin)   n_p3p2p1c1++;
    end
    $display("carry terms: G3=%0d P3G2=%0d P3P2G1=%0d P3P2P1C1=%0d", n_g3, n_p3g2, n_p3p2g1, n_p3p2p1c1);
    checks++;
    if (n_g3 == 0 || n_p3g2 == 0 || n_p3p2g1 == 0 || n_p3p2p1c1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
