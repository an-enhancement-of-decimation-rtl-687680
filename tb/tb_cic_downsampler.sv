// tb_cic_downsampler: test of the down sampler (R = 16, PHASE = 4, as in the
// filter, plus R = 4, PHASE = 0).
//
// Input samples arrive with random gaps. The testbench counts accepted
// samples itself and checks that dec_en is high exactly on the samples whose
// index is PHASE modulo R (never in a gap cycle), that the register then
// takes that sample's data and holds it until the next such sample, and that
// the number of kept samples is the number of input samples divided by R.
module tb_cic_downsampler;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [15:0] din = '0;
  logic en16, en4;
  logic signed [15:0] q16, q4;

  int checks = 0;
  int failures = 0;

  cic_downsampler #(.W(16), .R(16), .PHASE(4)) dut16 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .din(din), .dec_en(en16), .dout(q16));
  cic_downsampler #(.W(16), .R(4), .PHASE(0)) dut4 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .din(din), .dec_en(en4), .dout(q4));

  always #5 clk = ~clk;

  int   n = 0;          // accepted input samples
  int   kept16 = 0, kept4 = 0;
  logic signed [15:0] exp16 = '0, exp4 = '0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      din      = 16'($urandom);
      #1;
      checks += 2;
      if (en16 !== (in_valid && (n % 16) == 4)) begin failures++; $display("FAIL dec_en R=16 at sample %0d", n); end
      if (en4  !== (in_valid && (n % 4) == 0))  begin failures++; $display("FAIL dec_en R=4 at sample %0d", n); end
      if (in_valid) begin
        if ((n % 16) == 4) begin exp16 = din; kept16++; end
        if ((n % 4) == 0)  begin exp4  = din; kept4++;  end
        n++;
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (q16 !== exp16) begin failures++; $display("FAIL R=16 register %0d vs %0d", q16, exp16); end
      if (q4  !== exp4)  begin failures++; $display("FAIL R=4 register %0d vs %0d", q4, exp4); end
    end
    checks += 2;
    if (kept16 != (n + 11) / 16) begin failures++; $display("FAIL kept %0d of %0d (R=16)", kept16, n); end
    if (kept4 != (n + 3) / 4)    begin failures++; $display("FAIL kept %0d of %0d (R=4)", kept4, n); end
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
