// tb_cla_bcd_adder: exhaustive check of the one-digit carry look-ahead BCD
// adder. Every pair of BCD digits 0..9 with carry in 0 and 1 (200 cases) is
// applied; the expected digit and carry are worked out from the integer
// t = x + y + cin (carry when t > 9, digit t mod 10). It also counts the
// three ways the decimal carry can arise: no carry (t <= 9), carry from the
// binary carry of the top adder (t >= 16) and carry from the detection of a
// binary sum 10..15; each must occur.
module tb_cla_bcd_adder;
  import bcd_pkg::*;

  int checks = 0, failures = 0;
  int t, exp_s;
  logic exp_c;
  bcd_digit_t x, y, s;
  logic cin, cout;
  int n_none = 0, n_from_k = 0, n_from_z = 0;

  cla_bcd_adder dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout));

  initial begin
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < 10; i++)
        for (int j = 0; j < 10; j++) begin
          x = 4'(i); y = 4'(j); cin = c[0];
          #1;
          t = i + j + c;
          exp_c = (t > 9);
          exp_s = exp_c ? t - 10 : t;
          checks += 2;
          if (cout !== exp_c) begin failures++; $display("FAIL cout %0d+%0d+%0d -> %b", i, j, c, cout); end
          if (s !== 4'(exp_s)) begin failures++; $display("FAIL sum %0d+%0d+%0d -> %0d", i, j, c, s); end
          if (t <= 9)       n_none++;
          else if (t >= 16) n_from_k++;
          else              n_from_z++;
        end
    $display("carry cases: none=%0d binary_carry=%0d sum_10_to_15=%0d", n_none, n_from_k, n_from_z);
    checks++;
    if (n_none == 0 || n_from_k == 0 || n_from_z == 0) failures++;
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
