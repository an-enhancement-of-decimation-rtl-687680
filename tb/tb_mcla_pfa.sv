// tb_mcla_pfa: exhaustive test of the partial full adder bit slice.
//
// For all eight (a, b, c) it checks the sum bit against the low bit of the
// arithmetic sum a + b + c, the generate against "a and b both one" and the
// propagate against "exactly one of a, b is one".
module tb_mcla_pfa;

  logic a, b, c, p, g, s;
  int checks = 0;
  int failures = 0;

  mcla_pfa dut (.a(a), .b(b), .c(c), .p(p), .g(g), .s(s));

  initial begin
    for (int v = 0; v < 8; v++) begin
      automatic int total = v[0] + v[1] + v[2];
      {c, b, a} = 3'(v);
      #1;
      checks += 3;
      if (s !== total[0])                   begin failures++; $display("FAIL s for %b", v[2:0]); end
      if (g !== (v[0] == 1 && v[1] == 1))  begin failures++; $display("FAIL g for %b", v[2:0]); end
      if (p !== ((v[0] + v[1]) == 1))      begin failures++; $display("FAIL p for %b", v[2:0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
