// tb_cic_sdm_snr: the filter's evaluation workload: a sine through a
// sigma-delta modulator, decimated by the CIC filter, and the output's
// signal-to-noise ratio measured with a DFT.
//
// A behavioural second-order, 5-bit sigma-delta modulator (sigma_delta_model)
// runs at the input rate with a sine of half full scale at 3 kHz for a
// 6.144 MHz clock (1/2048 of the sample rate, bin 8 of a 1024-point DFT at the
// 384 kHz output rate, so the tone is coherent and no window is needed).
// After the pipeline has settled, 1024 consecutive outputs are collected and
// transformed. The testbench checks
//   - exactly one output per 16 input samples (the decimation rate),
//   - the tone lands in bin 8 with the expected level: half scale of 16 bits
//     is an amplitude near 0.5 * 15 * 2048 = 15360 times the 3 kHz CIC gain
//     (within 0.5 dB of that),
//   - the signal-to-noise ratio over the 0..24 kHz band (bins 1..64, without
//     DC and the tone's bin) is above 40 dB.
// It prints the measured SNR; the reference design's value is set by the
// pruned word lengths, not by the modulator.
module tb_cic_sdm_snr;

  localparam int  NOUT = 1024;
  localparam int  TONE = 8;
  localparam real PI   = 3.14159265358979;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic signed [4:0] code;
  logic              out_valid;
  logic signed [15:0] cic_out;

  int checks = 0;
  int failures = 0;

  sigma_delta_model #(.AMP(0.5), .FREQ_NUM(1), .FREQ_DEN(2048)) u_sdm (
    .clk(clk), .rst_n(rst_n), .code(code));

  cic_decimator dut (
    .clk(clk), .rst_n(rst_n), .in_valid(rst_n), .cic_in(code),
    .out_valid(out_valid), .cic_out(cic_out));

  always #5 clk = ~clk;

  real    y [NOUT];
  int     n_out = 0;
  longint n_cyc = 0;
  longint first_cyc = -1, last_cyc = -1;
  int     rate_fail = 0;

  always @(negedge clk) begin
    if (rst_n) n_cyc++;
    if (rst_n && out_valid) begin
      if (last_cyc >= 0 && n_cyc - last_cyc != 16) rate_fail++;
      last_cyc = n_cyc;
      // skip the first 40 outputs: pipeline fill and the modulator start-up
      if (n_out >= 40 && n_out < 40 + NOUT) y[n_out - 40] = real'(cic_out);
      n_out++;
    end
  end

  initial begin
    real re, im, p_sig, p_noise, snr, amp, want;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (n_out >= 40 + NOUT);
    @(negedge clk);

    checks++;
    if (rate_fail != 0) begin failures++; $display("FAIL %0d output intervals differ from 16 cycles", rate_fail); end

    p_sig = 0.0; p_noise = 0.0;
    for (int k = 1; k <= 64; k++) begin
      re = 0.0; im = 0.0;
      for (int i = 0; i < NOUT; i++) begin
        re += y[i] * $cos(2.0 * PI * real'(k * i) / real'(NOUT));
        im -= y[i] * $sin(2.0 * PI * real'(k * i) / real'(NOUT));
      end
      if (k == TONE) p_sig = re * re + im * im;
      else           p_noise += re * re + im * im;
    end
    snr = 10.0 * $log10(p_sig / p_noise);
    amp = 2.0 * $sqrt(p_sig) / real'(NOUT);
    // CIC magnitude at 3 kHz relative to DC: |sin(pi f R/fs)/(R sin(pi f/fs))|^5
    want = 15360.0 * $pow($sin(PI * 16.0 / 2048.0) / (16.0 * $sin(PI / 2048.0)), 5.0);
    $display("tone amplitude %f (expected about %f), in-band SNR %f dB", amp, want, snr);

    checks++;
    if (20.0 * $log10(amp / want) > 0.5 || 20.0 * $log10(amp / want) < -0.5) begin failures++; $display("FAIL tone level"); end
    checks++;
    if (snr < 40.0) begin failures++; $display("FAIL SNR %f dB below 40 dB", snr); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
