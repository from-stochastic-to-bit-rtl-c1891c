// tb_freq_divider: self-checking test of the auxiliary-signal divider.
// After reset S must count 0,1,2,... so that S_k toggles every 2^k cycles;
// trig must equal NOT S_top and frame_end must be high exactly once per
// 2^STAGES cycles, in the cycle with all S high.
module tb_freq_divider;
  localparam int unsigned STAGES = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [STAGES-1:0] s;
  logic trig, frame_end;
  int checks = 0, failures = 0;
  int last_end = -1;

  freq_divider #(.STAGES(STAGES)) dut (.clk(clk), .rst_n(rst_n), .s(s), .trig(trig), .frame_end(frame_end));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [STAGES-1:0] prev;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    #1 check(s == '0, "S not 0 after reset");
    prev = s;
    for (int t = 1; t < 200; t++) begin
      @(negedge clk); #1;
      for (int k = 0; k < STAGES; k++)
        check(int'(s[k]) == ((t >> k) & 1), $sformatf("t=%0d S%0d=%b", t, k, s[k]));
      check(trig == ~s[STAGES-1], "trig");
      if (frame_end) begin
        check(s == '1, "frame_end outside the all-ones slot");
        if (last_end >= 0) check(t - last_end == (1 << STAGES), $sformatf("frame period %0d", t - last_end));
        last_end = t;
      end
      prev = s;
    end
    check(last_end > 0, "no frame_end seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
