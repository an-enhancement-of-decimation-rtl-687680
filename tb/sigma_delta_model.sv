// sigma_delta_model: behavioural (non-synthesizable) stand-in for the
// oversampling sigma-delta modulator that feeds the CIC decimator, used only
// as a stimulus source by testbenches.
//
// It is a textbook second-order modulator with two delaying integrators and
// a 5-bit mid-tread quantizer (output codes -15..+15), computed in real
// arithmetic. Its input is a sine of amplitude AMP (fraction of full scale)
// and frequency FREQ_NUM/FREQ_DEN of the sample rate. One output code per
// clock edge while rst_n is high; the code is two's complement, matching the
// filter's cic_in. Nothing here is meant to model a particular analog design.
module sigma_delta_model #(
  parameter real AMP      = 0.5,
  parameter int  FREQ_NUM = 1,
  parameter int  FREQ_DEN = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic signed [4:0] code
);

  localparam real PI   = 3.14159265358979;
  localparam real FULL = 15.0;

  real    i1 = 0.0, i2 = 0.0, y = 0.0;
  longint n = 0;

  function automatic int quantize(real v);
    int q = $rtoi(v * FULL + ((v >= 0.0) ? 0.5 : -0.5));
    if (q > 15)  q = 15;
    if (q < -15) q = -15;
    return q;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      i1 <= 0.0; i2 <= 0.0; y <= 0.0; n <= 0; code <= '0;
    end else begin
      automatic real x  = AMP * $sin(2.0 * PI * real'(n) * real'(FREQ_NUM) / real'(FREQ_DEN));
      automatic real n1 = i1 + x - y;
      automatic real n2 = i2 + n1 - y;
      automatic int  q  = quantize(n2);
      i1   <= n1;
      i2   <= n2;
      y    <= real'(q) / FULL;
      code <= 5'(q);
      n    <= n + 1;
    end
  end

endmodule
