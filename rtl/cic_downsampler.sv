// cic_downsampler: the rate changer (down by R) between the integrator and
// comb sections of the CIC decimator, with its pipeline register.
//
// A modulo-R counter counts input samples (in_valid). On the sample at which
// the count equals PHASE it raises dec_en for that cycle and loads the
// current integrator output into its register dout, so dout holds one of
// every R integrator outputs. dec_en is the clock enable of the whole
// low-rate (comb) section: the comb registers advance on the same edge as
// dout, so the comb section runs R times slower than the integrators, as the
// paper describes, while the design keeps a single clock. The paper draws the
// down sampler followed by a register; the counter, the single clock with an
// enable, and PHASE are this design's choices.
//
// Timing: dec_en is combinational from in_valid and the counter; dout changes
// on the clock edge at which dec_en is high. rst_n (asynchronous, active low)
// clears the counter and dout.
module cic_downsampler #(
  parameter int unsigned W     = 16,  // data width
  parameter int unsigned R     = 16,  // decimation factor
  parameter int unsigned PHASE = 0    // count (0..R-1) at which a sample is kept
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,  // one high-rate sample this cycle
  input  logic signed [W-1:0] din,       // integrator output
  output logic                dec_en,    // low-rate enable, one cycle in R samples
  output logic signed [W-1:0] dout       // kept sample
);

  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;

  logic [CW-1:0] cnt;

  assign dec_en = in_valid && (cnt == CW'(PHASE));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      dout <= '0;
    end else begin
      if (in_valid) cnt <= (cnt == CW'(R - 1)) ? '0 : cnt + 1'b1;
      if (dec_en)   dout <= din;
    end
  end

  initial begin
    assert (R >= 1) else $error("cic_downsampler: R must be at least 1");
    assert (PHASE < R) else $error("cic_downsampler: PHASE must be below R");
  end

endmodule
