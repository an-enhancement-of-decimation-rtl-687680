// mcla_adder: W-bit modified carry lookahead adder (MCLA).
//
// The word is cut into 4-bit groups from the least significant end. Inside a
// group, one mcla_pfa per bit gives propagate/generate and takes its carry from
// the group's mcla_cll, so no carry ripples from bit to bit. Between groups the
// carry does ripple: the carry-out c4 of each group's lookahead logic is the
// carry-in of the next group, as in the paper's 8-bit adder built from two
// 4-bit modules. The paper uses this adder at 25, 22, 20, 18 and 16 bits.
// When W is not a multiple of 4 (25, 22, 18) the top group is only partly
// used: its unused bit slices see p = g = 0 and the carry-out is taken from
// the carry above the last real bit; this handling of a partial group is this
// design's choice. Purely combinational: sum = a + b + cin modulo 2^W, and
// cout is the carry out of bit W-1.
module mcla_adder #(
  parameter int unsigned W = 8   // adder width in bits
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);

  localparam int unsigned NG = (W + 3) / 4;   // number of 4-bit groups

  for (genvar gi = 0; gi < NG; gi++) begin : grp
    localparam int unsigned LSB  = 4 * gi;
    localparam int unsigned BITS = (W - LSB >= 4) ? 4 : (W - LSB);

    logic [3:0] p, g;     // bit propagates/generates (unused slices held at 0)
    logic [4:1] c;        // carries from the lookahead logic (c[4] is not used)
    logic       c0;       // carry into the group
    logic       pg, gg;   // group propagate/generate
    logic       co;       // carry out of the last real bit of the group

    if (gi == 0) begin : g_first
      assign c0 = cin;
    end else begin : g_next
      assign c0 = grp[gi-1].co;
    end

    for (genvar bi = 0; bi < 4; bi++) begin : bit_slice
      if (bi < BITS) begin : g_used
        logic ci;
        if (bi == 0) begin : g_c0
          assign ci = c0;
        end else begin : g_cn
          assign ci = c[bi];
        end
        mcla_pfa u_pfa (
          .a (a[LSB+bi]),
          .b (b[LSB+bi]),
          .c (ci),
          .p (p[bi]),
          .g (g[bi]),
          .s (sum[LSB+bi])
        );
      end else begin : g_unused
        assign p[bi] = 1'b0;
        assign g[bi] = 1'b0;
      end
    end

    mcla_cll u_cll (
      .p  (p),
      .g  (g),
      .c0 (c0),
      .c  (c),
      .pg (pg),
      .gg (gg)
    );

    // A full group hands its carry-out on through its group generate and
    // propagate (GG + PG.c0, equal to c4); a partial top group uses the
    // carry above its last bit.
    if (BITS == 4) begin : g_full
      assign co = gg | (pg & c0);
    end else begin : g_part
      assign co = c[BITS];
    end
  end

  assign cout = grp[NG-1].co;

endmodule
