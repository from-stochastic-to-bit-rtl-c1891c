// tb_aisa: self-checking test of the asynchronous increasing-length adder.
// Each trial presents two random n-bit streams in the same n slots and reads
// the 2n output slots. The expected output is built independently: slots
// 0..n-1 must repeat Input-1 and slots n..2n-1 must repeat Input-2, so the
// output holds a+b ones in 2n bits, the exact value (X1+X2)/2. Includes the
// published example (1,1,0,0 and 1,0,0,0 -> 1,1,0,0,1,0,0,0) at n=4.
module tb_aisa;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out;
  logic a4_in1 = 1'b0, a4_in2 = 1'b0, a4_out;
  int checks = 0, failures = 0;

  aisa #(.N(N)) dut   (.clk(clk), .rst_n(rst_n), .in1(in1), .in2(in2), .out(out));
  aisa #(.N(4)) dut4  (.clk(clk), .rst_n(rst_n), .in1(a4_in1), .in2(a4_in2), .out(a4_out));

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
    bit [N-1:0] s1, s2;
    bit [2*N-1:0] got;
    int ones;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // published example at n = 4
    begin
      bit [3:0] e1, e2;
      bit [7:0] g4, exp4;
      e1 = 4'b0011; e2 = 4'b0001;      // bit k = slot k: 1,1,0,0 and 1,0,0,0
      exp4 = 8'b0001_0011;             // 1,1,0,0,1,0,0,0
      for (int t = 0; t < 8; t++) begin
        @(negedge clk);
        a4_in1 = (t < 4) ? e1[t] : 1'b0;
        a4_in2 = (t < 4) ? e2[t] : 1'b0;
        #1 g4[t] = a4_out;
      end
      check(g4 == exp4, $sformatf("n=4 example: got %b", g4));
    end

    for (int trial = 0; trial < 200; trial++) begin
      s1 = N'($urandom); s2 = N'($urandom);
      if (trial == 0) begin s1 = '1; s2 = '1; end
      if (trial == 1) begin s1 = '0; s2 = '0; end
      for (int t = 0; t < 2 * N; t++) begin
        @(negedge clk);
        in1 = (t < N) ? s1[t] : 1'b0;
        in2 = (t < N) ? s2[t] : 1'b0;
        #1 got[t] = out;
      end
      ones = $countones(got);
      check(got == {s2, s1}, $sformatf("trial %0d: stream %b, expected %b", trial, got, {s2, s1}));
      check(ones == $countones(s1) + $countones(s2),
            $sformatf("trial %0d: %0d ones, expected %0d", trial, ones, $countones(s1) + $countones(s2)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
