// tb_full_adder: exhaustive check of the 1-bit full adder. For all eight
// input combinations {cout, s} must equal the integer a + b + cin.
module tb_full_adder;

  int checks = 0, failures = 0;
  int sum;
  logic a, b, cin, s, cout;

  full_adder dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = v[2:0];
      #1;
      sum = int'(a) + int'(b) + int'(cin);
      checks += 2;
      if (s !== sum[0])    begin failures++; $display("FAIL s %b%b%b -> %b", a, b, cin, s); end
      if (cout !== sum[1]) begin failures++; $display("FAIL cout %b%b%b -> %b", a, b, cin, cout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
