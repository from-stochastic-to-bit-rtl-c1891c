// tb_sisa: self-checking test of the synchronous increasing-length adder.
// Operation k: Input-1 (a random n-bit stream) is presented in slots n..2n-1
// of frame k, Input-2 in slots n..2n-1 of frame k+1; frame k+1 of the output
// must then carry the reconverted Input-1 in slots 0..n-1 (slot order of the
// published selection table, worked out here from the count) and Input-2
// unchanged in slots n..2n-1, i.e. a+b ones in 2n bits. Operations overlap:
// while Input-2 of one operation is presented, Input-1 of the next is
// counted. Also checks the 2n-cycle frame period through frame_start.
module tb_sisa;
  localparam int unsigned N = 8;
  localparam int unsigned K = $clog2(N);
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out, frame_start;
  logic [K:0] sel;
  int checks = 0, failures = 0;

  sisa #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in1(in1), .in2(in2), .out(out),
                     .frame_start(frame_start), .sel(sel));

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

  // expected reconverted slot of count a (table order: I0, I_K, I1 x2, I2 x4 ...)
  function automatic bit regen_slot(int a, int s);
    bit [K:0] v = (K+1)'(a);
    if (s == 0) return v[0] | v[K];
    if (s == 1) return v[K];
    for (int j = 1; j < K; j++) if (s >= (1 << j) && s < (1 << (j + 1))) return v[j] | v[K];
    return 1'b0;
  endfunction

  initial begin
    bit [N-1:0] x1 [0:40];
    bit [N-1:0] x2 [0:40];
    bit [2*N-1:0] got;
    int a;
    for (int k = 0; k <= 40; k++) begin
      x1[k] = N'($urandom); x2[k] = N'($urandom);
    end
    x1[1] = '1; x2[1] = '1;    // full-scale operands: 8/8 + 8/8
    x1[2] = '0; x2[2] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // frame f: slots 0..2n-1. Input-1 of op f and Input-2 of op f-1 share slots n..2n-1.
    for (int f = 0; f <= 40; f++) begin
      for (int t = 0; t < 2 * N; t++) begin
        #1;
        check(frame_start == (t == 0), $sformatf("frame %0d slot %0d: frame_start=%b", f, t, frame_start));
        in1 = (t >= N) ? x1[f][t-N] : 1'b0;
        in2 = (t >= N && f > 0) ? x2[f-1][t-N] : 1'b0;
        #1 got[t] = out;
        @(negedge clk);
      end
      if (f > 0) begin
        a = $countones(x1[f-1]);
        for (int t = 0; t < N; t++)
          check(got[t] == regen_slot(a, t), $sformatf("op %0d slot %0d", f - 1, t));
        check(got[2*N-1:N] == x2[f-1], $sformatf("op %0d Input-2 half %b", f - 1, got[2*N-1:N]));
        check($countones(got) == a + $countones(x2[f-1]),
              $sformatf("op %0d: %0d ones expected %0d", f - 1, $countones(got), a + $countones(x2[f-1])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
