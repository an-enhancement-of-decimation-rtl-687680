// tb_mcla_cll: exhaustive test of the 4-bit carry lookahead logic.
//
// For every combination of bit propagates, generates and carry-in it forms
// the carries by rippling c(i+1) = g(i) | p(i) & c(i) one bit at a time and
// compares them with the lookahead carries c1..c4; the group propagate must
// be the AND of all propagates and the group generate must equal the
// rippled carry-out for a zero carry-in. Only (p, g) pairs that a real bit
// can produce (p and g never both one) are driven.
module tb_mcla_cll;

  logic [3:0] p, g;
  logic       c0;
  logic [4:1] c;
  logic       pg, gg;
  logic [4:0] rc;     // rippled carries
  logic       gz;     // rippled carry-out for a zero carry-in
  int checks = 0;
  int failures = 0;

  mcla_cll dut (.p(p), .g(g), .c0(c0), .c(c), .pg(pg), .gg(gg));

  initial begin
    for (int v = 0; v < 512; v++) begin
      {c0, g, p} = 9'(v);
      #1;
      if ((p & g) == 4'b0) begin
        gz    = 1'b0;
        rc[0] = c0;
        for (int i = 0; i < 4; i++) begin
          rc[i+1] = g[i] | (p[i] & rc[i]);
          gz      = g[i] | (p[i] & gz);
        end
        checks += 3;
        if (c !== rc[4:1]) begin failures++; $display("FAIL c p=%b g=%b c0=%b: %b vs %b", p, g, c0, c, rc[4:1]); end
        if (pg !== (p == 4'hf)) begin failures++; $display("FAIL pg p=%b", p); end
        if (gg !== gz) begin failures++; $display("FAIL gg p=%b g=%b", p, g); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
