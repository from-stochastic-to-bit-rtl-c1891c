// tb_delay_line: self-checking test of the tapped bit-stream delay.
// Drives a random stream and checks every tap against a history of the input
// kept by the testbench: taps[k] must equal the bit presented k cycles ago.
// Also checks that reset clears the line.
module tb_delay_line;
  localparam int unsigned LEN = 8;
  logic clk = 1'b0, rst_n = 1'b0, din = 1'b0;
  logic [LEN:0] taps;
  int checks = 0, failures = 0;
  bit hist[$];

  delay_line #(.LEN(LEN)) dut (.clk(clk), .rst_n(rst_n), .din(din), .taps(taps));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < LEN; k++) hist.push_front(1'b0);
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      din = 1'($urandom_range(0, 1));
      hist.push_front(din);
      #1;
      for (int k = 0; k <= LEN; k++) begin
        checks++;
        if (taps[k] !== hist[k]) begin
          failures++;
          if (failures < 10) $display("t=%0d tap %0d = %b, expected %b", t, k, taps[k], hist[k]);
        end
      end
      if (hist.size() > LEN + 1) void'(hist.pop_back());
    end
    // reset clears every stage
    @(negedge clk) begin din = 1'b0; rst_n = 1'b0; end
    @(negedge clk) rst_n = 1'b1;
    #1 checks++;
    if (taps[LEN:1] != '0) begin failures++; $display("reset did not clear the line"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
