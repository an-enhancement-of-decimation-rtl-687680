// mcla_pfa: partial full adder, one bit slice of the modified carry
// lookahead adder (MCLA).
//
// It does not form its own carry-out. Instead it hands the bit's propagate
// (p = a xor b) and generate (g = a and b) to the 4-bit carry lookahead logic
// (mcla_cll), which returns the carry into this bit; the sum is p xor c.
// Purely combinational. The block name and its p/g outputs come from the
// paper's 8-bit MCLA drawing; the gate equations are the standard ones for a
// partial full adder, the paper does not print them.
module mcla_pfa (
  input  logic a,   // addend bit
  input  logic b,   // addend bit
  input  logic c,   // carry into this bit, from the lookahead logic
  output logic p,   // bit propagate
  output logic g,   // bit generate
  output logic s    // sum bit
);

  always_comb begin
    p = a ^ b;
    g = a & b;
    s = p ^ c;
  end

endmodule
