// tb_bcd754r_adder_top: end-to-end test of the multi-digit significand
// adder at its default size (34 digits), both digit architectures at once.
//
// Stimulus, all with valid BCD digits:
//   * random 34-digit operands with random carry in;
//   * 7-digit and 16-digit operands (upper digits zero), the significand
//     lengths of the two smaller IEEE 754r decimal formats; their sums are
//     also checked against plain 64-bit integer addition of the decimal
//     values;
//   * 99..9 + 0 + 1, whose carry ripples through every digit;
//   * digits pairs that add to 15 with no bit in common (e.g. 6+9, 7+8)
//     fed with a carry, which takes the carry-skip path.
// The expected result is decimal long addition, digit by digit, done here
// on integers. Both chains' sums, top carries and per-digit carries are
// compared with it. Mechanisms counted (each must occur): decimal
// correction of a digit, correction caused by a binary carry (digit sum
// >= 16), carry-skip taken, a carry through all digits, a top-digit carry
// out. Combinational: each vector is sampled 1 time unit after it is
// applied. A watchdog ends a hung run.
module tb_bcd754r_adder_top;
  import bcd_pkg::*;

  localparam int unsigned D = DECIMAL128_DIGITS;

  int checks = 0, failures = 0;
  int n_corr = 0, n_corr_k = 0, n_skip = 0, n_full_ripple = 0, n_cout = 0;
  int n_vec = 0;

  bcd_digit_t [D-1:0] x, y, sum_cla, sum_cs, exp_sum;
  logic               cin, cout_cla, cout_cs, exp_cout;
  logic [D-1:0]       carry_cla, carry_cs, p_blk_cs, exp_carry;

  bcd754r_adder_top dut (
    .x(x), .y(y), .cin(cin),
    .sum_cla(sum_cla), .cout_cla(cout_cla), .carry_cla(carry_cla),
    .sum_cs(sum_cs), .cout_cs(cout_cs), .carry_cs(carry_cs),
    .p_blk_cs(p_blk_cs)
  );

  // Decimal long addition on integers.
  task automatic reference();
    int c, t;
    c = int'(cin);
    for (int i = 0; i < D; i++) begin
      t = int'(x[i]) + int'(y[i]) + c;
      c = (t > 9) ? 1 : 0;
      exp_sum[i]   = 4'(t - 10 * c);
      exp_carry[i] = c[0];
      if (c == 1) n_corr++;
      if (t >= 16) n_corr_k++;
    end
    exp_cout = c[0];
  endtask

  function automatic longint to_int(bcd_digit_t [D-1:0] v, int n);
    longint r = 0;
    for (int i = n - 1; i >= 0; i--) r = r * 10 + longint'(v[i]);
    return r;
  endfunction

  task automatic apply_and_check(int int_digits);
    reference();
    #1;
    n_vec++;
    checks += 6;
    if (sum_cla !== exp_sum)     begin failures++; $display("FAIL cla sum  %h + %h + %b -> %h exp %h", x, y, cin, sum_cla, exp_sum); end
    if (cout_cla !== exp_cout)   begin failures++; $display("FAIL cla cout"); end
    if (carry_cla !== exp_carry) begin failures++; $display("FAIL cla carries %h exp %h", carry_cla, exp_carry); end
    if (sum_cs !== exp_sum)      begin failures++; $display("FAIL cs sum   %h + %h + %b -> %h exp %h", x, y, cin, sum_cs, exp_sum); end
    if (cout_cs !== exp_cout)    begin failures++; $display("FAIL cs cout"); end
    if (carry_cs !== exp_carry)  begin failures++; $display("FAIL cs carries %h exp %h", carry_cs, exp_carry); end
    for (int i = 0; i < D; i++) begin
      logic ci;
      ci = (i == 0) ? cin : exp_carry[i-1];
      if (p_blk_cs[i] && ci) n_skip++;
    end
    if (&exp_carry) n_full_ripple++;
    if (exp_cout) n_cout++;
    if (int_digits > 0) begin
      longint a, b, s;
      a = to_int(x, int_digits);
      b = to_int(y, int_digits);
      s = to_int(sum_cla, int_digits + 1);
      checks += 2;
      if (s !== a + b + longint'(cin)) begin failures++; $display("FAIL %0d-digit cla %0d + %0d -> %0d", int_digits, a, b, s); end
      s = to_int(sum_cs, int_digits + 1);
      if (s !== a + b + longint'(cin)) begin failures++; $display("FAIL %0d-digit cs %0d + %0d -> %0d", int_digits, a, b, s); end
    end
  endtask

  task automatic random_operands(int n);
    for (int i = 0; i < D; i++) begin
      x[i] = (i < n) ? 4'($urandom_range(9)) : 4'd0;
      y[i] = (i < n) ? 4'($urandom_range(9)) : 4'd0;
    end
    cin = 1'($urandom_range(1));
  endtask

  initial begin
    // Full carry ripple: 99..9 + 00..0 + 1.
    for (int i = 0; i < D; i++) begin x[i] = 4'd9; y[i] = 4'd0; end
    cin = 1'b1;
    apply_and_check(0);

    // Carry-skip path in every digit: 6+9 / 7+8 / 9+6 digits, carry in 1.
    for (int i = 0; i < D; i++) begin
      case (i % 3)
        0: begin x[i] = 4'd6; y[i] = 4'd9; end
        1: begin x[i] = 4'd7; y[i] = 4'd8; end
        default: begin x[i] = 4'd9; y[i] = 4'd6; end
      endcase
    end
    cin = 1'b1;
    apply_and_check(0);

    // All nines plus all nines.
    for (int i = 0; i < D; i++) begin x[i] = 4'd9; y[i] = 4'd9; end
    cin = 1'b1;
    apply_and_check(0);

    // Decimal32 and decimal64 significand lengths.
    repeat (300) begin random_operands(DECIMAL32_DIGITS); apply_and_check(DECIMAL32_DIGITS); end
    repeat (300) begin random_operands(DECIMAL64_DIGITS); apply_and_check(DECIMAL64_DIGITS); end

    // Decimal128 significand length (the default size).
    repeat (2000) begin random_operands(D); apply_and_check(0); end

    $display("vectors=%0d corrections=%0d corrections_from_binary_carry=%0d skips=%0d full_ripples=%0d top_carries=%0d",
             n_vec, n_corr, n_corr_k, n_skip, n_full_ripple, n_cout);
    checks += 5;
    if (n_corr == 0)        begin failures++; $display("FAIL no decimal correction seen"); end
    if (n_corr_k == 0)      begin failures++; $display("FAIL no binary-carry correction seen"); end
    if (n_skip == 0)        begin failures++; $display("FAIL carry-skip path never taken"); end
    if (n_full_ripple == 0) begin failures++; $display("FAIL no full-length carry ripple"); end
    if (n_cout == 0)        begin failures++; $display("FAIL no top-digit carry out"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
