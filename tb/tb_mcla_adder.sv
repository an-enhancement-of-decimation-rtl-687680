// tb_mcla_adder: test of the modified carry lookahead adder at the widths
// the filter uses and at 8 bits.
//
// The 8-bit adder (two full 4-bit groups) is checked exhaustively, with both
// carry-in values. The 25-, 22-, 18- and 16-bit adders (partial and full top
// groups) are checked with random operands plus carry-chain corner cases
// (all ones + 1, alternating patterns). Sum and carry-out are compared with
// the integer sum a + b + cin.
module tb_mcla_adder;

  int checks = 0;
  int failures = 0;

  logic [7:0]  a8, b8, s8;    logic c8i, c8o;
  logic [24:0] a25, b25, s25; logic c25i, c25o;
  logic [21:0] a22, b22, s22; logic c22i, c22o;
  logic [17:0] a18, b18, s18; logic c18i, c18o;
  logic [15:0] a16, b16, s16; logic c16i, c16o;

  mcla_adder #(.W(8))  u8  (.a(a8),  .b(b8),  .cin(c8i),  .sum(s8),  .cout(c8o));
  mcla_adder #(.W(25)) u25 (.a(a25), .b(b25), .cin(c25i), .sum(s25), .cout(c25o));
  mcla_adder #(.W(22)) u22 (.a(a22), .b(b22), .cin(c22i), .sum(s22), .cout(c22o));
  mcla_adder #(.W(18)) u18 (.a(a18), .b(b18), .cin(c18i), .sum(s18), .cout(c18o));
  mcla_adder #(.W(16)) u16 (.a(a16), .b(b16), .cin(c16i), .sum(s16), .cout(c16o));

  task automatic check(string tag, longint unsigned a, longint unsigned b, bit ci,
                       longint unsigned s, bit co, int w);
    longint unsigned full = a + b + longint'(ci);
    longint unsigned mask = (longint'(1) << w) - 1;
    checks++;
    if (s != (full & mask) || co != full[w]) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: %0h + %0h + %0d = %0h cout %0d", tag, a, b, ci, s, co);
    end
  endtask

  task automatic drive_wide(longint unsigned a, longint unsigned b, bit ci);
    a25 = 25'(a); b25 = 25'(b); c25i = ci;
    a22 = 22'(a); b22 = 22'(b); c22i = ci;
    a18 = 18'(a); b18 = 18'(b); c18i = ci;
    a16 = 16'(a); b16 = 16'(b); c16i = ci;
    #1;
    check("w25", a25, b25, c25i, s25, c25o, 25);
    check("w22", a22, b22, c22i, s22, c22o, 22);
    check("w18", a18, b18, c18i, s18, c18o, 18);
    check("w16", a16, b16, c16i, s16, c16o, 16);
  endtask

  initial begin
    for (int x = 0; x < 256; x++)
      for (int y = 0; y < 256; y++)
        for (int ci = 0; ci < 2; ci++) begin
          a8 = 8'(x); b8 = 8'(y); c8i = ci[0];
          #1;
          check("w8", a8, b8, c8i, s8, c8o, 8);
        end

    drive_wide('1, 0, 1'b1);
    drive_wide('1, 1, 1'b0);
    drive_wide('1, '1, 1'b1);
    drive_wide(64'h5555555555555555, 64'haaaaaaaaaaaaaaaa, 1'b1);
    drive_wide(64'h0, 64'h0, 1'b0);
    for (int i = 0; i < 20000; i++)
      drive_wide({$urandom, $urandom}, {$urandom, $urandom}, 1'($urandom));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
