// cic_integrator: one pipelined, pruned integrator stage of the CIC decimator.
//
// Each enabled cycle the stage adds its input to its accumulator:
//   acc <= acc + trunc(din)
// with an MCLA (mcla_adder) as the adder and the accumulator itself as the
// stage's output register, so a chain of these stages has one register per
// stage and no adder-to-adder combinational path (the pipelined integrator of
// the paper, which needs no registers beyond the integrators' own).
// Arithmetic is two's complement modulo 2^W: an accumulator that wraps is
// normal CIC behaviour and the final comb output is still exact.
//
// Pruning: the stages are aligned at their most significant bit. When the
// input is wider than W (IN_W > W), its IN_W-W least significant bits are
// discarded (truncation, i.e. rounding toward minus infinity); when it is
// narrower it is sign-extended. The widths are parameters; the paper's are
// 25, 22, 20, 18 and 16 bits. Truncating at the stage input (rather than at
// the previous stage's output) is this design's choice; it gives the same
// bits either way.
//
// Interface: en qualifies one input sample; dout is valid from the clock edge
// after the sample was taken (one cycle of latency per stage). rst_n is an
// asynchronous, active-low reset that clears the accumulator (the paper does
// not describe reset).
module cic_integrator #(
  parameter int unsigned IN_W = 25,   // width of din
  parameter int unsigned W    = 25    // accumulator and output width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,     // one input sample this cycle
  input  logic signed [IN_W-1:0] din,
  output logic signed [W-1:0]    dout
);

  logic signed [W-1:0] x;      // truncated or sign-extended input
  logic        [W-1:0] sum;    // acc + x

  if (IN_W >= W) begin : g_trunc
    assign x = din[IN_W-1 -: W];
  end else begin : g_ext
    assign x = W'(din);
  end

  mcla_adder #(.W(W)) u_add (
    .a    (dout),
    .b    (x),
    .cin  (1'b0),
    .sum  (sum),
    .cout ()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  dout <= '0;
    else if (en) dout <= sum;
  end

endmodule
