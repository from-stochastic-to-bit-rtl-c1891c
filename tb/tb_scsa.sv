// tb_scsa: self-checking test of the two-input constant-length adder.
// Reference: the published transition table, coded here as an independent
// per-bit model (00 -> 0, carry kept; 01/10 -> carry, carry flipped; 11 -> 1,
// carry kept). Checks the two published examples (1,1,1,0 + 0,1,0,1 -> 0,1,1,0
// with carry 1 left over; 1,1,1,0 + 0,1,1,1 -> 0,1,1,1 with carry 0), then
// random successive streams without reset, where each output bit must match
// the model and each n-bit stream from reset must hold floor((a+b)/2) ones.
module tb_scsa;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out, carry;
  int checks = 0, failures = 0;

  scsa dut (.clk(clk), .rst_n(rst_n), .in1(in1), .in2(in2), .out(out), .carry(carry));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic do_reset();
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
  endtask

  // present one 4-bit stream pair (bit k = slot k), return output and final carry
  task automatic run4(input bit [3:0] s1, input bit [3:0] s2, output bit [3:0] o, output bit c);
    for (int t = 0; t < 4; t++) begin
      in1 = s1[t]; in2 = s2[t];
      #1 o[t] = out;
      @(negedge clk);
    end
    #1 c = carry;
  endtask

  initial begin
    bit [3:0] o;
    bit c, mc, mo;
    bit [N-1:0] s1, s2;
    int ones;
    repeat (2) @(posedge clk);
    do_reset();
    run4(4'b0111, 4'b1010, o, c);
    check(o == 4'b0110 && c == 1'b1, $sformatf("example a: out %b carry %b", o, c));
    do_reset();
    run4(4'b0111, 4'b1110, o, c);
    check(o == 4'b1110 && c == 1'b0, $sformatf("example b: out %b carry %b", o, c));

    // successive streams, carry kept across them
    do_reset();
    mc = 1'b0;
    for (int k = 0; k < 100; k++) begin
      s1 = N'($urandom); s2 = N'($urandom);
      for (int t = 0; t < N; t++) begin
        in1 = s1[t]; in2 = s2[t];
        if (in1 == in2) mo = in1;
        else begin mo = mc; mc = ~mc; end
        #1 check(out == mo, $sformatf("stream %0d slot %0d", k, t));
        @(negedge clk);
      end
    end

    // single streams from reset: floor((a+b)/2)
    for (int k = 0; k < 100; k++) begin
      do_reset();
      s1 = N'($urandom); s2 = N'($urandom);
      ones = 0;
      for (int t = 0; t < N; t++) begin
        in1 = s1[t]; in2 = s2[t];
        #1 ones += out;
        @(negedge clk);
      end
      check(ones == ($countones(s1) + $countones(s2)) / 2,
            $sformatf("a=%0d b=%0d gave %0d ones", $countones(s1), $countones(s2), ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
