// tb_cic_decimator: end-to-end test of the CIC decimator at its default
// parameters (N = 5, M = 1, R = 16, 5-bit input, 25/22/20/18/16-bit
// integrators, 16-bit combs).
//
// A sample-level reference model, written independently of the RTL's
// structure (plain integer arithmetic, one sample at a time, no pipeline),
// predicts every output word; the testbench compares each out_valid word with
// it bit for bit. Further checks that do not rely on the model:
//   - the first six outputs after reset are zero (pipeline fill);
//   - latency: out_valid rises 85 cycles after the clock edge that takes the
//     last input sample of a block (N cycles through the integrators and the
//     down-sampler register, then N*R cycles through the five comb registers)
//     when input arrives every cycle;
//   - one output per R accepted input samples, also with gaps in in_valid;
//   - DC gain: a constant x settles to about 2048*x (2^20 gain, 9 bits
//     dropped), for x = +15 and x = -15;
//   - a 5-bit sine's output stays within 160 LSB rms of the untruncated CIC
//     output / 512. The pruned widths (3 bits dropped ahead of integrator 2,
//     and more later) leave an rms truncation error of about 75 output LSB,
//     which is what this bound allows for with a factor of two.
// It also counts how often each mechanism occurred (integrator wrap-around,
// truncation that dropped non-zero bits, input gaps, decimated outputs) and
// fails if one never did.
module tb_cic_decimator;
  import cic_pkg::*;

  localparam int unsigned N  = CIC_N;
  localparam int unsigned R  = CIC_R;
  localparam int unsigned BI = CIC_B_IN;
  localparam int unsigned OW = CIC_INT_W[N-1];
  localparam int unsigned LATENCY = N + N * R;   // 85 cycles

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 in_valid = 1'b0;
  logic signed [BI-1:0] cic_in = '0;
  logic                 out_valid;
  logic signed [OW-1:0] cic_out;

  int checks = 0;
  int failures = 0;

  cic_decimator dut (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .cic_in    (cic_in),
    .out_valid (out_valid),
    .cic_out   (cic_out)
  );

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  longint integ_s [N];      // truncated integrator states
  longint comb_prev [N];    // comb delay elements
  longint ideal_i [N];      // untruncated integrators (full precision, no wrap)
  longint ideal_c [N];
  longint expected [$];     // expected output words, in order
  real    ideal_out [$];    // untruncated output / 2^9, same order
  int     n_samples = 0;

  int cnt_wrap = 0;         // integrator sums that wrapped
  int cnt_trunc = 0;        // truncations that dropped non-zero bits
  int cnt_gap = 0;          // cycles with in_valid low
  int cnt_out = 0;          // outputs seen

  function automatic longint wrap(longint v, int unsigned w);
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= (m >> 1)) r -= m;
    return r;
  endfunction

  task automatic model_sample(longint x);
    longint in_j, s, d, t, di, dt;
    for (int j = 0; j < N; j++) begin
      if (j == 0) in_j = x;
      else begin
        int unsigned drop = CIC_INT_W[j-1] - CIC_INT_W[j];
        in_j = integ_s[j-1] >>> drop;
        if ((integ_s[j-1] & ((longint'(1) << drop) - 1)) != 0) cnt_trunc++;
      end
      s = integ_s[j] + in_j;
      integ_s[j] = wrap(s, CIC_INT_W[j]);
      if (integ_s[j] != s) cnt_wrap++;
      ideal_i[j] = ideal_i[j] + ((j == 0) ? x : ideal_i[j-1]);
    end
    n_samples++;
    if ((n_samples % R) == 0) begin
      d  = integ_s[N-1];
      di = ideal_i[N-1];
      for (int j = 0; j < N; j++) begin
        t = d;
        d = wrap(d - comb_prev[j], OW);
        comb_prev[j] = t;
        dt = di;
        di = di - ideal_c[j];
        ideal_c[j] = dt;
      end
      expected.push_back(d);
      ideal_out.push_back(real'(di) / 512.0);
    end
  endtask

  // ---------------- output checker ----------------
  int     out_idx = 0;
  longint cyc = 0;
  longint take_cycle [$];    // cycle at which each block's last sample was taken
  logic   lat_valid [$];     // that block saw no input gap before its output
  int     lat_checks = 0;
  real    err_sq = 0.0;
  int     err_n = 0;
  real    err_max = 0.0;
  int     err_from = 1 << 30;   // first block compared with the ideal filter
  logic   continuous = 1'b1;
  int     gap_block = 1 << 30;  // first block that may see an input gap    // input has arrived every cycle so far
  longint last_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      cnt_out++;
      last_out = cic_out;
      checks++;
      if (out_idx < int'(N) + 1) begin
        if (cic_out !== '0) begin
          failures++;
          $display("FAIL fill output %0d = %0d, expected 0", out_idx, cic_out);
        end
      end else begin
        automatic int m = out_idx - int'(N) - 1;
        if (m >= expected.size()) begin
          failures++;
          $display("FAIL output %0d appeared before its input block was complete", out_idx);
        end else begin
          if (longint'(cic_out) != expected[m]) begin
            failures++;
            if (failures < 10)
              $display("FAIL output %0d (block %0d): got %0d expected %0d", out_idx, m, cic_out, expected[m]);
          end
          if (m < take_cycle.size() && lat_valid[m] && m + int'(N) + 1 < gap_block) begin
            checks++;
            lat_checks++;
            if (cyc - take_cycle[m] != LATENCY) begin
              failures++;
              $display("FAIL latency block %0d: %0d cycles, expected %0d", m, cyc - take_cycle[m], LATENCY);
            end
          end
          if (m >= err_from) begin
            automatic real e = real'(cic_out) - ideal_out[m];
            if (e < 0) e = -e;
            err_sq += e * e;
            err_n++;
            if (e > err_max) err_max = e;
          end
        end
      end
      out_idx++;
    end
  end

  // ---------------- stimulus ----------------
  task automatic drive(longint x, bit valid);
    @(negedge clk);
    in_valid = valid;
    cic_in   = BI'(x);
    if (valid) begin
      model_sample(x);
      if ((n_samples % R) == 0) begin
        // cycle counter value after the posedge that takes this sample
        take_cycle.push_back(cyc + 1);
        lat_valid.push_back(continuous);
      end
    end else begin
      cnt_gap++;
    end
  endtask

  task automatic drain(int cycles);
    repeat (cycles) drive(0, 1'b0);
  endtask

  task automatic check_dc(longint x, string tag);
    longint want = x * 2048;
    longint diff = last_out - want;
    checks++;
    if (diff < 0) diff = -diff;
    if (diff > 328) begin
      failures++;
      $display("FAIL DC %s: x=%0d output %0d, expected about %0d", tag, x, last_out, want);
    end else
      $display("DC %s: x=%0d output %0d (ideal %0d)", tag, x, last_out, want);
  endtask

  int unsigned seed_dummy;
  localparam real PI = 3.14159265358979;

  initial begin
    for (int j = 0; j < N; j++) begin
      integ_s[j] = 0; comb_prev[j] = 0; ideal_i[j] = 0; ideal_c[j] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // A: random full-range input every cycle (latency is checked here)
    for (int i = 0; i < 400 * int'(R); i++)
      drive(longint'($signed(BI'($urandom))), 1'b1);

    // B: full-scale constants
    for (int i = 0; i < 64 * int'(R); i++) drive(15, 1'b1);
    drain(0);
    for (int i = 0; i < 8 * int'(R); i++) drive(15, 1'b1);
    check_dc(15, "positive full scale");
    for (int i = 0; i < 64 * int'(R); i++) drive(-15, 1'b1);
    check_dc(-15, "negative");
    // -16, the most negative input, is compared with the model only: the
    // truncation error can push its ideal -32768 just past the 16-bit range.
    for (int i = 0; i < 16 * int'(R); i++) drive(-16, 1'b1);

    // C: sine, about 1/100 of the output rate, with random input gaps;
    // compared with the ideal filter once the start-up transient is over
    continuous = 1'b0;
    gap_block = expected.size();
    err_from = expected.size() + 2 * int'(N);
    for (int i = 0; i < 300 * int'(R); i++) begin
      automatic real v = 15.0 * $sin(2.0 * PI * real'(i) / (100.0 * real'(R)));
      if ($urandom_range(0, 3) == 0) drive(0, 1'b0);
      drive(longint'($rtoi(v + ((v >= 0) ? 0.5 : -0.5))), 1'b1);
    end
    // flush the pipeline so that every block reaches the output
    for (int i = 0; i < (int'(N) + 2) * int'(R); i++) drive(0, 1'b1);
    drain(4);

    // sine accuracy against the untruncated filter (after the start-up ramp)
    checks++;
    if (err_n == 0 || $sqrt(err_sq / err_n) > 160.0) begin
      failures++;
      $display("FAIL sine: rms error %f LSB over %0d outputs", (err_n == 0) ? 0.0 : $sqrt(err_sq / err_n), err_n);
    end
    $display("sine: rms error %f LSB, max %f LSB over %0d outputs", $sqrt(err_sq / err_n), err_max, err_n);

    // every complete block produced exactly one output
    checks++;
    if (out_idx - int'(N) - 1 > expected.size() || out_idx - int'(N) - 1 < expected.size() - int'(N) - 1) begin
      failures++;
      $display("FAIL %0d outputs for %0d complete blocks", out_idx, expected.size());
    end

    // mechanisms
    $display("mechanisms: wraps=%0d truncations=%0d input_gaps=%0d outputs=%0d latency_checks=%0d",
             cnt_wrap, cnt_trunc, cnt_gap, cnt_out, lat_checks);
    checks++; if (cnt_wrap == 0)   begin failures++; $display("FAIL no integrator wrap-around"); end
    checks++; if (cnt_trunc == 0)  begin failures++; $display("FAIL no truncation"); end
    checks++; if (cnt_gap == 0)    begin failures++; $display("FAIL no input gap"); end
    checks++; if (cnt_out == 0)    begin failures++; $display("FAIL no output"); end
    checks++; if (lat_checks == 0) begin failures++; $display("FAIL no latency check"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
