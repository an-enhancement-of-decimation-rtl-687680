// cic_decimator: five-stage, pruned, fully pipelined CIC decimation filter
// with modified carry lookahead adders.
//
// The filter computes H(z) = ((1 - z^-RM) / (1 - z^-1))^N and keeps one of
// every R outputs: N integrators at the input rate, a down sampler, and N
// combs at the output rate. Defaults are the paper's: N = 5, M = 1, R = 16
// (6.144 MHz in, 384 kHz out), integrators of 25, 22, 20, 18 and 16 bits with
// an MCLA each, five 16-bit combs, and a register after every integrator,
// after the down sampler and after every comb, so that no path holds more
// than one adder.
//
// Word lengths: the DC gain is (RM)^N = 2^20, so a B_IN-bit input needs
// B_IN + 20 bits at full precision. The paper gives the 25-bit first stage but
// not the input width; B_IN = 5 is this design's choice, the width for which
// 25 bits is exactly full precision (the paper's MSB formula,
// N log2 R + B_in - 1 = 25, would give 6 if 25 were read as a width; a 6-bit
// full-scale input would then wrap the output). All stages are aligned at
// the MSB and later stages drop low bits at their input (see
// cic_integrator), so cic_out carries bits 24..9 of the full-precision
// result: for a constant input x it settles near x * 2^20 / 2^9 = 2048 x.
// All arithmetic wraps modulo 2^width, which the CIC structure tolerates as
// long as the final word can hold the output.
//
// Interface and timing (single clock; the comb section is enabled once in R
// input samples, which is this design's way of clocking it R times slower):
//   in_valid/cic_in  one input sample per cycle in which in_valid is high
//                    (every cycle for a 6.144 MHz clock). cic_in is the
//                    sigma-delta modulator's multi-bit output, two's complement.
//   out_valid        one-cycle pulse when cic_out has taken a new value;
//                    cic_out then holds it until the next pulse.
// Output k (counting from 0 after reset) covers input samples up to index
// 16(k-6)+15: the down sampler keeps the integrator value that includes the
// last sample of each block of R, and the down-sampler register plus five comb
// registers add six output periods of latency. The first six outputs after
// reset are the pipeline filling up. rst_n: asynchronous, active low, clears
// every register (reset is not described in the paper).
module cic_decimator
  import cic_pkg::*;
#(
  parameter int unsigned N     = CIC_N,       // stages
  parameter int unsigned M     = CIC_M,       // comb differential delay
  parameter int unsigned R     = CIC_R,       // decimation factor
  parameter int unsigned B_IN  = CIC_B_IN,    // input width
  parameter int unsigned INT_W [N] = CIC_INT_W  // integrator widths, stage 1 first
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic signed [B_IN-1:0]      cic_in,
  output logic                        out_valid,
  output logic signed [INT_W[N-1]-1:0] cic_out
);

  localparam int unsigned CW = INT_W[N-1];   // comb and output width

  // The first integrator must hold the full-precision word, and later stages
  // may only get narrower.
  if (INT_W[0] != full_precision_width(N, R, M, B_IN)) begin : g_chk_w0
    $error("cic_decimator: INT_W[0] must be B_IN + N*log2(R*M)");
  end
  for (genvar j = 1; j < N; j++) begin : g_chk_w
    if (INT_W[j] > INT_W[j-1]) begin : g_err
      $error("cic_decimator: integrator widths must not grow");
    end
  end

  // ---------------- integrator section (input rate) ----------------
  for (genvar j = 0; j < N; j++) begin : integ
    logic signed [INT_W[j]-1:0] q;
    if (j == 0) begin : g_first
      cic_integrator #(.IN_W(B_IN), .W(INT_W[0])) u_int (
        .clk (clk), .rst_n (rst_n), .en (in_valid), .din (cic_in), .dout (q)
      );
    end else begin : g_next
      cic_integrator #(.IN_W(INT_W[j-1]), .W(INT_W[j])) u_int (
        .clk (clk), .rst_n (rst_n), .en (in_valid), .din (integ[j-1].q), .dout (q)
      );
    end
  end

  // ---------------- down sampler ----------------
  // The last integrator's output is N-1 samples behind the input, and the
  // down sampler sees it one more cycle later; keeping count N-1 (mod R)
  // therefore keeps the value that ends each block of R input samples.
  logic                 dec_en;
  logic signed [CW-1:0] ds_q;

  cic_downsampler #(.W(CW), .R(R), .PHASE((N - 1) % R)) u_ds (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .din      (integ[N-1].q),
    .dec_en   (dec_en),
    .dout     (ds_q)
  );

  // ---------------- comb section (output rate) ----------------
  for (genvar j = 0; j < N; j++) begin : comb
    logic signed [CW-1:0] q;
    if (j == 0) begin : g_first
      cic_comb #(.W(CW), .M(M)) u_comb (
        .clk (clk), .rst_n (rst_n), .en (dec_en), .din (ds_q), .dout (q)
      );
    end else begin : g_next
      cic_comb #(.W(CW), .M(M)) u_comb (
        .clk (clk), .rst_n (rst_n), .en (dec_en), .din (comb[j-1].q), .dout (q)
      );
    end
  end

  assign cic_out = comb[N-1].q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= dec_en;
  end

endmodule
