// tb_gl_or: exhaustive check of the cascaded pass-transistor OR gate for
// 2, 3 and 4 inputs (the widths the adders use). Each output is compared
// with the reduction OR of the applied inputs. Combinational: inputs are
// applied, then sampled 1 time unit later. A watchdog ends the run if it
// hangs.
module tb_gl_or;

  int checks = 0, failures = 0;

  logic [1:0] a2; logic y2;
  logic [2:0] a3; logic y3;
  logic [3:0] a4; logic y4;

  gl_or #(.N(2)) dut2 (.a(a2), .y(y2));
  gl_or #(.N(3)) dut3 (.a(a3), .y(y3));
  gl_or #(.N(4)) dut4 (.a(a4), .y(y4));

  initial begin
    for (int v = 0; v < 16; v++) begin
      a2 = v[1:0]; a3 = v[2:0]; a4 = v[3:0];
      #1;
      checks += 3;
      if (y2 !== (v[1:0] != 2'b00))   begin failures++; $display("FAIL or2 a=%b y=%b", a2, y2); end
      if (y3 !== (v[2:0] != 3'b000))  begin failures++; $display("FAIL or3 a=%b y=%b", a3, y3); end
      if (y4 !== (v[3:0] != 4'b0000)) begin failures++; $display("FAIL or4 a=%b y=%b", a4, y4); end
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
