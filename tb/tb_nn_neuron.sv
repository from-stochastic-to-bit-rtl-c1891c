// tb_nn_neuron: self-checking test of the bit-stream perceptron.
// Random inputs x_i (0..n) and signed weights w_i (-n..n) are applied every
// frame. The expected output is computed bit by bit from the published
// arithmetic, independently of the RTL: each product stream from the
// regeneration algorithm (a ones AND the error-diffused b/n stream), the two
// sign trees from the two-input adder's transition table (carries kept from
// frame to frame), the tree outputs counted over n slots, ReLU of the
// difference. y must match exactly, arrive with y_valid in slot 1 of the
// frame after next, and stay within a small bound of the exact real-valued
// result (checked as a sanity bound on the scaling).
module tb_nn_neuron;
  localparam int N      = 8;
  localparam int NUM_IN = 16;
  localparam int P      = 16;
  localparam int W      = $clog2(N) + 1;
  localparam int FRAMES = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  logic        [W-1:0] x [NUM_IN];
  logic signed [W:0]   w [NUM_IN];
  logic [W-1:0] y;
  logic y_valid, frame_start;
  int checks = 0, failures = 0;

  nn_neuron #(.NUM_IN(NUM_IN), .N(N)) dut (.clk(clk), .rst_n(rst_n), .x(x), .w(w), .y(y),
                                           .y_valid(y_valid), .frame_start(frame_start));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (FRAMES * N + 500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic bit [N-1:0] prod_stream(int a, int b);
    int c;
    bit [N-1:0] r;
    c = 0;
    for (int i = 0; i < N; i++) begin
      c += b;
      if (c >= N / 2) begin r[i] = (i < a); c -= N; end
      else r[i] = 1'b0;
    end
    return r;
  endfunction

  int xs [0:FRAMES][NUM_IN];
  int ws [0:FRAMES][NUM_IN];

  initial begin
    bit [N-1:0] ps [NUM_IN];
    bit pos_s [2*P], neg_s [2*P];
    bit pc [P], nc [P];
    int cp, cn, yexp, yprev, f, t, of, os, nvalid, nrelu0, npos;
    real exact;
    for (int k = 0; k <= FRAMES; k++)
      for (int i = 0; i < NUM_IN; i++) begin
        xs[k][i] = $urandom_range(0, N);
        ws[k][i] = int'($urandom_range(0, 2 * N)) - N;
      end
    for (int k = 1; k < P; k++) begin pc[k] = 0; nc[k] = 0; end
    for (int i = 0; i < NUM_IN; i++) begin x[i] = '0; w[i] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    cp = 0; cn = 0; yprev = 0; nvalid = 0; nrelu0 = 0; npos = 0;
    for (int c = 0; c < FRAMES * N; c++) begin
      f = c / N; t = c % N;
      #1;
      check(frame_start == (t == 0), "frame_start");
      for (int i = 0; i < NUM_IN; i++) begin x[i] = W'(xs[f][i]); w[i] = (W+1)'(ws[f][i]); end
      #1;
      // product streams: operands sampled at the end of frame f occupy cycles (f+1)N+1 .. (f+2)N
      for (int i = 0; i < P; i++) begin pos_s[P+i] = 0; neg_s[P+i] = 0; end
      if (c >= N + 1) begin
        of = (c - 1) / N - 1; os = (c - 1) % N;
        for (int i = 0; i < NUM_IN; i++) begin
          bit pb;
          pb = prod_stream(xs[of][i], ws[of][i] < 0 ? -ws[of][i] : ws[of][i])[os];
          if (ws[of][i] < 0) neg_s[P+i] = pb; else pos_s[P+i] = pb;
        end
      end
      for (int k = P - 1; k >= 1; k--) begin
        // two-input adder transition table
        if (pos_s[2*k] == pos_s[2*k+1]) pos_s[k] = pos_s[2*k];
        else begin pos_s[k] = pc[k]; pc[k] = ~pc[k]; end
        if (neg_s[2*k] == neg_s[2*k+1]) neg_s[k] = neg_s[2*k];
        else begin neg_s[k] = nc[k]; nc[k] = ~nc[k]; end
      end
      cp += pos_s[1]; cn += neg_s[1];
      // y register: visible in slot 1 after the window closes in slot 0
      if (t == 1 && c > N) begin
        check(y_valid == 1'b1, $sformatf("cycle %0d: y_valid missing", c));
        check(int'(y) == yprev, $sformatf("cycle %0d: y=%0d expected %0d", c, y, yprev));
        nvalid++;
        if (c > 2 * N) begin
          of = f - 2;
          exact = 0.0;
          for (int i = 0; i < NUM_IN; i++) exact += real'(xs[of][i]) * real'(ws[of][i]);
          exact = exact / real'(N * P);
          if (exact < 0.0) exact = 0.0;
          check((real'(yprev) - exact) <= 3.0 && (exact - real'(yprev)) <= 3.0,
                $sformatf("frame %0d: y=%0d far from exact %f", of, yprev, exact));
          if (yprev == 0) nrelu0++; else npos++;
        end
      end else begin
        check(y_valid == 1'b0, $sformatf("cycle %0d: stray y_valid", c));
      end
      if (t == 0 && c > 0) begin
        yexp = cp > cn ? cp - cn : 0;
        yprev = yexp;
        cp = 0; cn = 0;
      end
      @(negedge clk);
    end
    $display("results %0d (ReLU clipped %0d, positive %0d)", nvalid, nrelu0, npos);
    check(nrelu0 > 0 && npos > 0, "ReLU never clipped or never passed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
