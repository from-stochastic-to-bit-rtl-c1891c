// tb_scsm: self-checking test of the constant-length multiplier.
// Reference: the published regeneration algorithm, coded here with a signed
// carry: RegIn1 = a ones then zeros; for each slot carry += b and, if
// carry >= n/2, RegIn2 = 1 and carry -= n. The expected product stream is
// RegIn1 AND RegIn2. Operand pairs follow each other without gaps; the
// product of frame f must appear bit for bit in the n cycles that start two
// cycles after the last input bit of frame f, and its number of ones must be
// within 0.5 of a*b/n. Includes both published regeneration examples
// (4/8 x 2/8 -> 0,1,0,0,0,0,0,0 and 3/8 x 7/8 -> 1,1,1,0,0,0,0,0).
module tb_scsm;
  localparam int unsigned N = 8;
  localparam int unsigned W = $clog2(N) + 1;
  localparam int FRAMES = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out, frame_start, reg_in1, reg_in2;
  logic [W-1:0] carry;
  int checks = 0, failures = 0;

  scsm #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in1(in1), .in2(in2), .out(out),
                     .frame_start(frame_start), .reg_in1(reg_in1), .reg_in2(reg_in2), .carry(carry));

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

  function automatic bit [N-1:0] algo(int a, int b);
    int c;
    bit [N-1:0] r1, r2;
    c = 0;
    for (int i = 0; i < N; i++) begin
      r1[i] = (i < a);
      c += b;
      if (c >= int'(N) / 2) begin r2[i] = 1'b1; c -= int'(N); end
      else r2[i] = 1'b0;
    end
    return r1 & r2;
  endfunction

  bit [N-1:0] x1 [0:FRAMES];
  bit [N-1:0] x2 [0:FRAMES];
  bit [N-1:0] expq[$];

  initial begin
    bit [N-1:0] got;
    int a, b, err2;
    for (int k = 0; k <= FRAMES; k++) begin x1[k] = N'($urandom); x2[k] = N'($urandom); end
    // published examples (bit k = slot k)
    x1[0] = 8'b1000_1110; x2[0] = 8'b0100_0001;   // 0,1,1,1,0,0,0,1 and 1,0,0,0,0,0,1,0
    x1[1] = 8'b1000_1010; x2[1] = 8'b1111_1011;   // 0,1,0,1,0,0,0,1 and 1,1,0,1,1,1,1,1
    x1[2] = '1; x2[2] = '1;
    x1[3] = '0; x2[3] = '1;
    check(algo(4, 2) == 8'b0000_0010, "reference model, example a");
    check(algo(3, 7) == 8'b0000_0111, "reference model, example b");
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // cycle c counts from 0 at the first slot of frame 0; output of frame f
    // occupies cycles (f+1)*N + 1 .. (f+2)*N
    for (int c = 0; c < (FRAMES + 1) * N; c++) begin
      int f, t;
      f = c / N; t = c % N;
      #1;
      check(frame_start == (t == 0), $sformatf("cycle %0d frame_start=%b", c, frame_start));
      in1 = x1[f][t]; in2 = x2[f][t];
      #1;
      if (c >= N + 1) begin
        int of, os;
        of = (c - 1) / N - 1; os = (c - 1) % N;
        got[os] = out;
        if (os == N - 1) begin
          a = $countones(x1[of]); b = $countones(x2[of]);
          check(got == algo(a, b), $sformatf("frame %0d (a=%0d b=%0d): got %b expected %b", of, a, b, got, algo(a, b)));
          err2 = 2 * N * $countones(got) - 2 * a * b;  // 2n * (ones - ab/n)
          check(err2 <= int'(N) && err2 >= -int'(N), $sformatf("frame %0d error beyond 0.5/n", of));
          if (of == 0) check(got == 8'b0000_0010, "example a output");
          if (of == 1) check(got == 8'b0000_0111, "example b output");
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
