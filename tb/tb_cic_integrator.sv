// tb_cic_integrator: test of the pruned, pipelined integrator stage.
//
// Two instances are driven with random data and a random enable:
//   - IN_W = 5,  W = 25: the first stage, whose input is sign-extended;
//   - IN_W = 25, W = 22: the second stage, which drops 3 input LSBs.
// A reference accumulator in plain integer arithmetic (input shifted right
// arithmetically, sum wrapped to W bits) predicts the output after every
// clock edge. The test also checks that a disabled cycle holds the
// accumulator, that the output changes one edge after the sample (one cycle
// of latency) and that wrap-around occurred.
module tb_cic_integrator;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic signed [4:0]  d5  = '0;
  logic signed [24:0] d25 = '0;
  logic signed [24:0] q_a;
  logic signed [21:0] q_b;

  int checks = 0;
  int failures = 0;
  int wraps = 0;
  int holds = 0;

  cic_integrator #(.IN_W(5),  .W(25)) dut_a (.clk(clk), .rst_n(rst_n), .en(en), .din(d5),  .dout(q_a));
  cic_integrator #(.IN_W(25), .W(22)) dut_b (.clk(clk), .rst_n(rst_n), .en(en), .din(d25), .dout(q_b));

  always #5 clk = ~clk;

  function automatic longint wrap(longint v, int w);
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= (m >> 1)) r -= m;
    return r;
  endfunction

  longint ref_a = 0, ref_b = 0;

  initial begin
    repeat (2) @(negedge clk);
    checks += 2;
    if (q_a != 0 || q_b != 0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 4) != 0);
      d5  = 5'($urandom);
      // mostly large values so that the 22-bit stage wraps often
      d25 = 25'($urandom);
      // output before the edge must not have changed yet
      checks += 2;
      if (longint'(q_a) != ref_a || longint'(q_b) != ref_b) begin
        failures++; $display("FAIL output changed before the clock edge");
      end
      if (en) begin
        automatic longint sa = ref_a + longint'(d5);
        automatic longint sb = ref_b + (longint'(d25) >>> 3);
        ref_a = wrap(sa, 25);
        ref_b = wrap(sb, 22);
        if (sb != ref_b) wraps++;
      end else holds++;
      @(posedge clk);
      #1;
      checks += 2;
      if (longint'(q_a) != ref_a) begin failures++; if (failures < 10) $display("FAIL stage1 %0d vs %0d", q_a, ref_a); end
      if (longint'(q_b) != ref_b) begin failures++; if (failures < 10) $display("FAIL stage2 %0d vs %0d", q_b, ref_b); end
    end
    checks += 2;
    if (wraps == 0) begin failures++; $display("FAIL no wrap-around"); end
    if (holds == 0) begin failures++; $display("FAIL no disabled cycle"); end
    $display("wraps=%0d holds=%0d", wraps, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
