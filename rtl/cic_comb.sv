// cic_comb: one pipelined comb stage of the CIC decimator, 1 - z^-M at the
// low (decimated) rate.
//
// On each enabled cycle (en = the down sampler's dec_en) the stage shifts its
// input into an M-deep delay line and loads its output register with the
// difference between the input and the input M enabled cycles earlier:
//   dout <= din - din(M samples ago)
// The output register is the comb's pipeline register. The paper draws the
// delay and the register and fixes M = 1 and 16-bit combs; it places its MCLA
// adders in the integrators only, so the subtraction here is left to the
// synthesis tool. Arithmetic is modulo 2^W. rst_n (asynchronous, active low)
// clears the delay line and the output. Latency: one enabled cycle.
module cic_comb #(
  parameter int unsigned W = 16,  // data width
  parameter int unsigned M = 1    // differential delay, in low-rate samples
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,    // low-rate sample enable
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout
);

  logic signed [W-1:0] dly [M];   // dly[0] is the newest stored input

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) dly[i] <= '0;
      dout <= '0;
    end else if (en) begin
      dly[0] <= din;
      for (int i = 1; i < M; i++) dly[i] <= dly[i-1];
      dout <= din - dly[M-1];
    end
  end

endmodule
