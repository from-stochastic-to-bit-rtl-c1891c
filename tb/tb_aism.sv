// tb_aism: self-checking test of the asynchronous increasing-length
// multiplier.
// n = 3: checks the published pairing of bits into the nine output slots
//   (slot: 0 A&X, 1 B&Y, 2 C&Z, 3 B&X, 4 C&Y, 5 C&X, 6 A&Z, 7 A&Y, 8 B&Z,
//   where A,B,C and X,Y,Z are the bits of Input-1 and Input-2) for all 64
//   input pairs.
// n = 8 (default): for every pair (i, j) of single-1 streams the output must
//   hold exactly one 1 (each bit pair meets in a slot of its own), and random
//   streams must give exactly a*b ones in n^2 slots.
module tb_aism;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in1 = 1'b0, in2 = 1'b0, out;
  logic s_in1 = 1'b0, s_in2 = 1'b0, s_out;
  int checks = 0, failures = 0;

  aism #(.N(N)) dut  (.clk(clk), .rst_n(rst_n), .in1(in1),   .in2(in2),   .out(out));
  aism #(.N(3)) dut3 (.clk(clk), .rst_n(rst_n), .in1(s_in1), .in2(s_in2), .out(s_out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // one operation on the n = 8 unit; returns the n^2 output slots
  task automatic run8(input bit [N-1:0] s1, input bit [N-1:0] s2, output bit [N*N-1:0] got);
    for (int t = 0; t < N * N; t++) begin
      @(negedge clk);
      in1 = (t < N) ? s1[t] : 1'b0;
      in2 = (t < N) ? s2[t] : 1'b0;
      #1 got[t] = out;
    end
  endtask

  initial begin
    bit [N*N-1:0] got;
    bit [8:0] g3, e3;
    bit [N-1:0] s1, s2;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // n = 3, published slot assignment
    for (int v1 = 0; v1 < 8; v1++)
      for (int v2 = 0; v2 < 8; v2++) begin
        bit A, B, C, X, Y, Z;
        {C, B, A} = 3'(v1); {Z, Y, X} = 3'(v2);
        e3 = {B & Z, A & Y, A & Z, C & X, C & Y, B & X, C & Z, B & Y, A & X};
        for (int t = 0; t < 9; t++) begin
          @(negedge clk);
          s_in1 = (t < 3) ? v1[t] : 1'b0;
          s_in2 = (t < 3) ? v2[t] : 1'b0;
          #1 g3[t] = s_out;
        end
        check(g3 == e3, $sformatf("n=3 in1=%b in2=%b: got %b expected %b", 3'(v1), 3'(v2), g3, e3));
      end

    // n = 8, every bit pair in its own slot
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        run8(N'(1) << i, N'(1) << j, got);
        check($countones(got) == 1, $sformatf("n=8 pair (%0d,%0d): %0d ones", i, j, $countones(got)));
      end

    // n = 8, random operands
    for (int trial = 0; trial < 60; trial++) begin
      s1 = N'($urandom); s2 = N'($urandom);
      if (trial == 0) begin s1 = '1; s2 = '1; end
      run8(s1, s2, got);
      check($countones(got) == $countones(s1) * $countones(s2),
            $sformatf("n=8 %b x %b: %0d ones, expected %0d", s1, s2, $countones(got),
                      $countones(s1) * $countones(s2)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
