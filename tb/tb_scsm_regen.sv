// tb_scsm_regen: self-checking test of the multiplier's regeneration core.
// For every operand pair a, b in 0..n the two regenerated streams of the n
// cycles after the load must equal the published regeneration algorithm:
// RegIn1 = a ones then zeros; RegIn2 from a signed carry that adds b each
// slot and, when it reaches n/2, emits 1 and subtracts n. Operand pairs are
// loaded back to back, one every n cycles.
module tb_scsm_regen;
  localparam int N = 8;
  localparam int W = $clog2(N) + 1;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [W-1:0] a = '0, b = '0, carry;
  logic reg_in1, reg_in2;
  int checks = 0, failures = 0;

  scsm_regen #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .load(load), .a(a), .b(b),
                           .reg_in1(reg_in1), .reg_in2(reg_in2), .carry(carry));

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
    int c;
    bit e1, e2;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // load the first pair
    for (int av = 0; av <= N; av++)
      for (int bv = 0; bv <= N; bv++) begin
        a = W'(av); b = W'(bv); load = 1'b1;
        @(negedge clk);
        load = 1'b0; a = W'($urandom); b = W'($urandom);
        c = 0;
        for (int i = 0; i < N; i++) begin
          e1 = (i < av);
          c += bv;
          if (c >= N / 2) begin e2 = 1'b1; c -= N; end
          else e2 = 1'b0;
          #1;
          check(reg_in1 == e1, $sformatf("a=%0d slot %0d reg_in1=%b", av, i, reg_in1));
          check(reg_in2 == e2, $sformatf("b=%0d slot %0d reg_in2=%b", bv, i, reg_in2));
          if (i < N - 1) @(negedge clk);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
