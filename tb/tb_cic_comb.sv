// tb_cic_comb: test of the pipelined comb stage with M = 1 (the filter's)
// and M = 2.
//
// Random data and a random enable drive both instances. The testbench keeps
// its own history of enabled inputs and checks after every edge that the
// output is x[k] - x[k-M] wrapped to 16 bits (x before the first sample taken
// as zero), that it holds while the enable is low, and that wrap-around of
// the difference occurred.
module tb_cic_comb;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic signed [15:0] din = '0;
  logic signed [15:0] q1, q2;

  int checks = 0;
  int failures = 0;
  int wraps = 0;

  cic_comb #(.W(16), .M(1)) dut1 (.clk(clk), .rst_n(rst_n), .en(en), .din(din), .dout(q1));
  cic_comb #(.W(16), .M(2)) dut2 (.clk(clk), .rst_n(rst_n), .en(en), .din(din), .dout(q2));

  always #5 clk = ~clk;

  int hist [$];
  int e1 = 0, e2 = 0;

  function automatic int wrap16(int v);
    return int'(16'(v) ^ 16'h8000) - 32768;
  endfunction

  initial begin
    hist = {0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      en  = ($urandom_range(0, 2) != 0);
      din = 16'($urandom);
      if (en) begin
        hist.push_back(int'(din));
        e1 = wrap16(hist[$] - hist[$-1]);
        e2 = wrap16(hist[$] - hist[$-2]);
        if (e1 != hist[$] - hist[$-1]) wraps++;
      end
      @(posedge clk);
      #1;
      checks += 2;
      if (int'(q1) != e1) begin failures++; if (failures < 10) $display("FAIL M=1 %0d vs %0d", q1, e1); end
      if (int'(q2) != e2) begin failures++; if (failures < 10) $display("FAIL M=2 %0d vs %0d", q2, e2); end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL no wrap-around"); end
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
