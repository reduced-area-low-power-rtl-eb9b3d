// tb_cs_bcd_adder: exhaustive check of the one-digit carry-skip BCD adder.
// Every pair of BCD digits 0..9 with carry in 0 and 1 (200 cases) is
// applied; the expected digit and carry come from the integer
// t = x + y + cin. The block propagate output must equal "every bit of x
// differs from y", computed here as x + y == 15 with no bit in common. The
// test counts how often the skip path carries (block propagate and carry in
// both 1) and the three carry cases (none, t >= 16, t in 10..15); each must
// occur.
module tb_cs_bcd_adder;
  import bcd_pkg::*;

  int checks = 0, failures = 0;
  int t, exp_s;
  logic exp_c, exp_p;
  bcd_digit_t x, y, s;
  logic cin, cout, p_blk;
  int n_none = 0, n_from_k = 0, n_from_z = 0, n_skip = 0;

  cs_bcd_adder dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout), .p_blk(p_blk));

  initial begin
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < 10; i++)
        for (int j = 0; j < 10; j++) begin
          x = 4'(i); y = 4'(j); cin = c[0];
          #1;
          t = i + j + c;
          exp_c = (t > 9);
          exp_s = exp_c ? t - 10 : t;
          exp_p = (i + j == 15) && ((i & j) == 0);
          checks += 3;
          if (cout !== exp_c)  begin failures++; $display("FAIL cout %0d+%0d+%0d -> %b", i, j, c, cout); end
          if (s !== 4'(exp_s)) begin failures++; $display("FAIL sum %0d+%0d+%0d -> %0d", i, j, c, s); end
          if (p_blk !== exp_p) begin failures++; $display("FAIL p_blk %0d,%0d -> %b", i, j, p_blk); end
          if (exp_p && c == 1) n_skip++;
          if (t <= 9)       n_none++;
          else if (t >= 16) n_from_k++;
          else              n_from_z++;
        end
    $display("carry cases: none=%0d binary_carry=%0d sum_10_to_15=%0d skip=%0d",
             n_none, n_from_k, n_from_z, n_skip);
    checks++;
    if (n_none == 0 || n_from_k == 0 || n_from_z == 0 || n_skip == 0) failures++;
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
