// tb_sism: self-checking test of the synchronous increasing-length multiplier.
// Operands are presented in the first n slots of frame k; frame k+1 of the
// output (n^2 slots) must hold exactly a*b ones. n = 4: the published example
// (1,1,0,1 x 1,1,1,0 -> 0,0,0,0,0,1,1,1,0,1,1,1,0,1,1,1) must be reproduced bit
// for bit. n = 8 (default): random operands, full-scale and zero operands, and
// the n^2-cycle frame period.
module tb_sism;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out, frame_start;
  logic [2*$clog2(N)-1:0] sel;
  logic s4_in1 = 1'b0, s4_in2 = 1'b0, s4_out, s4_fs;
  logic [3:0] s4_sel;
  int checks = 0, failures = 0;

  sism #(.N(N)) dut  (.clk(clk), .rst_n(rst_n), .in1(in1), .in2(in2), .out(out),
                      .frame_start(frame_start), .sel(sel));
  sism #(.N(4)) dut4 (.clk(clk), .rst_n(rst_n), .in1(s4_in1), .in2(s4_in2), .out(s4_out),
                      .frame_start(s4_fs), .sel(s4_sel));

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

  // n = 4 unit: published example, frame 0 counts, frame 1 outputs
  initial begin
    bit [15:0] got;
    automatic bit [3:0] e1 = 4'b1011;  // slots 1,1,0,1
    automatic bit [3:0] e2 = 4'b0111;  // slots 1,1,1,0
    automatic bit [15:0] exp16 = 16'b1110_1110_1110_0000;  // 0,0,0,0,0,1,1,1,0,1,1,1,0,1,1,1
    @(posedge rst_n);
    for (int t = 0; t < 32; t++) begin
      #1;
      s4_in1 = (t < 4) ? e1[t] : 1'b0;
      s4_in2 = (t < 4) ? e2[t] : 1'b0;
      if (t >= 16) begin #1 got[t-16] = s4_out; end
      @(negedge clk);
    end
    check(got == exp16, $sformatf("n=4 example: got %b", got));
  end

  initial begin
    bit [N-1:0] x1 [0:20];
    bit [N-1:0] x2 [0:20];
    bit [N*N-1:0] got;
    int nfs;
    for (int k = 0; k <= 20; k++) begin x1[k] = N'($urandom); x2[k] = N'($urandom); end
    x1[1] = '1; x2[1] = '1;
    x1[2] = '0; x2[2] = N'($urandom);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f <= 20; f++) begin
      nfs = 0;
      for (int t = 0; t < N * N; t++) begin
        #1;
        nfs += frame_start;
        if (t == 0) check(frame_start, $sformatf("frame %0d does not start at slot 0", f));
        in1 = (t < N) ? x1[f][t] : 1'b0;
        in2 = (t < N) ? x2[f][t] : 1'b0;
        #1 got[t] = out;
        @(negedge clk);
      end
      check(nfs == 1, "frame period is not n^2");
      if (f > 0)
        check($countones(got) == $countones(x1[f-1]) * $countones(x2[f-1]),
              $sformatf("op %0d: %0d ones expected %0d", f - 1, $countones(got),
                        $countones(x1[f-1]) * $countones(x2[f-1])));
    end
    #50;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
