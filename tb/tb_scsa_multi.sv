// tb_scsa_multi: self-checking test of the four-input constant-length adder.
// Reference per cycle: carry += number of 1 inputs; if carry >= 4 the output
// is 1 and 4 is subtracted (carry starts at 2). Each 8-bit stream group from
// reset must give round((a+b+c+d)/4) ones, i.e. floor((sum+2)/4), so the
// error is at most half a bit. Successive groups run without reset as well.
module tb_scsa_multi;
  localparam int unsigned NUM_IN = 4;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NUM_IN-1:0] in_bits = '0;
  logic out;
  logic [1:0] carry;
  int checks = 0, failures = 0;

  scsa_multi #(.NUM_IN(NUM_IN)) dut (.clk(clk), .rst_n(rst_n), .in_bits(in_bits), .out(out), .carry(carry));

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

  initial begin
    int mc, cnt, ones, total;
    bit mo;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    mc = 2;
    for (int t = 0; t < 800; t++) begin
      in_bits = NUM_IN'($urandom);
      cnt = $countones(in_bits);
      mc += cnt;
      mo = (mc >= NUM_IN);
      if (mo) mc -= NUM_IN;
      #1 check(out == mo, $sformatf("t=%0d out=%b expected %b", t, out, mo));
      @(negedge clk);
      #1 check(int'(carry) == mc, $sformatf("t=%0d carry %0d expected %0d", t, carry, mc));
    end
    for (int k = 0; k < 100; k++) begin
      @(negedge clk) rst_n = 1'b0;
      @(negedge clk) rst_n = 1'b1;
      ones = 0; total = 0;
      for (int t = 0; t < N; t++) begin
        in_bits = NUM_IN'($urandom);
        total += $countones(in_bits);
        #1 ones += out;
        @(negedge clk);
      end
      check(ones == (total + 2) / 4, $sformatf("group %0d: sum %0d gave %0d ones", k, total, ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
