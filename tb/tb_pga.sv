// tb_pga: exhaustive check of the propagate/generate cell. For all eight
// input combinations, s must be the parity of a, b, c, g must be a AND b and
// p must be a XOR b, computed here from the integer sum a + b.
module tb_pga;

  int checks = 0, failures = 0;
  int ab;
  logic a, b, c, s, g, p;

  pga dut (.a(a), .b(b), .c(c), .s(s), .g(g), .p(p));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = v[2:0];
      #1;
      ab = int'(a) + int'(b);
      checks += 3;
      if (s !== ((ab + int'(c)) % 2 == 1)) begin failures++; $display("FAIL s %b%b%b -> %b", a, b, c, s); end
      if (g !== (ab == 2))                 begin failures++; $display("FAIL g %b%b -> %b", a, b, g); end
      if (p !== (ab == 1))                 begin failures++; $display("FAIL p %b%b -> %b", a, b, p); end
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
