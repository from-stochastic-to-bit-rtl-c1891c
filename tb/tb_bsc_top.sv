// tb_bsc_top: end-to-end test of all six bit-stream circuits and the perceptron
// at their default size (n = 8, four-input constant-length adder, 16-input
// perceptron), running together from one
// reset for 40 frames of the n^2-cycle multiplier.
//
// Schedule (cycle c counted from the first cycle after reset, when every
// frame counter is at slot 0):
//   AISA   one operation every 2n cycles, operands in the first n slots
//   AISM   one operation every n^2 cycles, operands in the first n slots
//   SISA   2n-cycle frames; Input-1 of operation f and Input-2 of operation
//          f-1 share slots n..2n-1 of frame f
//   SISM   n^2-cycle frames; operands in the first n slots, product in the
//          next frame
//   SCSM   n-cycle frames back to back (successive processing)
//   SCSA   multi-level: its Input-1 is the SCSM output stream, its Input-2 a
//          random stream
//   SCSA4  four random streams, continuously
//   NN     16 random inputs and signed weights per n-cycle frame; output
//          checked bit-exact against a model built from the multiplier's
//          regeneration algorithm and the adder's transition table
// Every result is compared with a model written here from the arithmetic
// (exact sums and products for the increasing-length units, the published
// regeneration algorithm and transition table for the constant-length ones).
// The mechanisms the design relies on are counted and each must occur:
// the SISA frame half in which the multiplexer is grounded and Input-2
// passes, full-scale operands (count = n, the R_K path of the OR gates), SCSA
// carry storage and rounding, SCSA4 carry-out, SCSM carry subtraction and
// rounding, back-to-back SCSM frames, multi-level SCSM -> SCSA operation, and
// a perceptron result that the ReLU clips as well as one it passes.
module tb_bsc_top;
  localparam int N      = 8;
  localparam int NUM_IN = 4;
  localparam int NSQ    = N * N;
  localparam int FR     = 40;            // multiplier frames simulated
  localparam int CYCLES = FR * NSQ;
  localparam int NN_IN  = 16;
  localparam int W      = $clog2(N) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic aisa_in1 = 0, aisa_in2 = 0, aisa_out;
  logic aism_in1 = 0, aism_in2 = 0, aism_out;
  logic sisa_in1 = 0, sisa_in2 = 0, sisa_out, sisa_frame_start;
  logic sism_in1 = 0, sism_in2 = 0, sism_out, sism_frame_start;
  logic scsa_in1 = 0, scsa_in2 = 0, scsa_out, scsa_carry;
  logic [NUM_IN-1:0] scsa4_in = '0;
  logic scsa4_out;
  logic scsm_in1 = 0, scsm_in2 = 0, scsm_out, scsm_frame_start, scsm_reg_in2;
  logic        [W-1:0] nn_x [NN_IN];
  logic signed [W:0]   nn_w [NN_IN];
  logic [W-1:0] nn_y;
  logic nn_y_valid, nn_frame_start;
  int checks = 0, failures = 0;

  bsc_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (CYCLES + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL: %s", what); end
  endtask

  function automatic bit [N-1:0] rand_stream(int k);
    // every 7th operand is full scale, every 11th zero
    if (k % 7 == 3) return '1;
    if (k % 11 == 5) return '0;
    return N'($urandom);
  endfunction

  function automatic bit [N-1:0] scsm_model(int a, int b);
    int c;
    bit [N-1:0] r1, r2;
    c = 0;
    for (int i = 0; i < N; i++) begin
      r1[i] = (i < a);
      c += b;
      if (c >= N / 2) begin r2[i] = 1'b1; c -= N; end
      else r2[i] = 1'b0;
    end
    return r1 & r2;
  endfunction

  function automatic bit [N-1:0] prod_stream(int a, int b);
    return scsm_model(a, b);
  endfunction

  // operands, indexed by operation number
  bit [N-1:0] aisa_x1 [0:CYCLES/(2*N)], aisa_x2 [0:CYCLES/(2*N)];
  bit [N-1:0] aism_x1 [0:FR],           aism_x2 [0:FR];
  bit [N-1:0] sisa_x1 [0:CYCLES/(2*N)], sisa_x2 [0:CYCLES/(2*N)];
  bit [N-1:0] sism_x1 [0:FR],           sism_x2 [0:FR];
  bit [N-1:0] scsm_x1 [0:CYCLES/N],     scsm_x2 [0:CYCLES/N];
  int nn_xs [0:CYCLES/N][NN_IN];
  int nn_ws [0:CYCLES/N][NN_IN];
  bit nn_pos [2*NN_IN], nn_neg [2*NN_IN];
  bit nn_pc [NN_IN], nn_nc [NN_IN];
  int nn_cp = 0, nn_cn = 0, nn_yprev = 0, n_relu_clip = 0, n_relu_pass = 0;

  // mechanism counters
  int n_sisa_in2_pass = 0, n_full_scale = 0, n_scsa_carry = 0, n_scsa_round = 0;
  int n_scsa4_cout = 0, n_scsm_sub = 0, n_scsm_round = 0, n_scsm_b2b = 0;
  int n_multilevel = 0, n_aisa = 0, n_aism = 0, n_sisa = 0, n_sism = 0;

  initial begin
    bit [2*N-1:0] aisa_got, sisa_got;
    bit [NSQ-1:0] aism_got, sism_got;
    bit [N-1:0]   scsm_got;
    bit [N-1:0]   lvl_in;
    int scsa_c, scsa_ones, scsa_sum, scsa4_c;
    bit exp;

    for (int k = 0; k <= CYCLES / (2 * N); k++) begin
      aisa_x1[k] = rand_stream(k); aisa_x2[k] = rand_stream(k + 1);
      sisa_x1[k] = rand_stream(k + 2); sisa_x2[k] = rand_stream(k + 3);
    end
    for (int k = 0; k <= FR; k++) begin
      aism_x1[k] = rand_stream(k + 4); aism_x2[k] = rand_stream(k);
      sism_x1[k] = rand_stream(k + 5); sism_x2[k] = rand_stream(k + 1);
    end
    for (int k = 0; k <= CYCLES / N; k++) begin
      scsm_x1[k] = rand_stream(k + 6); scsm_x2[k] = rand_stream(k + 2);
    end

    for (int k = 0; k <= CYCLES / N; k++)
      for (int i = 0; i < NN_IN; i++) begin
        nn_xs[k][i] = $urandom_range(0, N);
        nn_ws[k][i] = (k % 3 == 0) ? int'($urandom_range(0, N)) : int'($urandom_range(0, 2 * N)) - N;
      end
    for (int k = 1; k < NN_IN; k++) begin nn_pc[k] = 0; nn_nc[k] = 0; end
    for (int i = 0; i < NN_IN; i++) begin nn_x[i] = '0; nn_w[i] = '0; end

    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    scsa_c = 0; scsa4_c = 2; scsa_ones = 0; scsa_sum = 0;

    for (int c = 0; c < CYCLES; c++) begin
      int ta, fa, ts, fs, tm, fm, tq, fq;
      ta = c % (2 * N); fa = c / (2 * N);   // AISA op / SISA frame
      tm = c % NSQ;     fm = c / NSQ;       // AISM op / SISM frame
      tq = c % N;       fq = c / N;         // SCSM frame
      ts = ta; fs = fa;
      #1;
      // ---------------- stimulus ----------------
      aisa_in1 = (ta < N) ? aisa_x1[fa][ta] : 1'b0;
      aisa_in2 = (ta < N) ? aisa_x2[fa][ta] : 1'b0;
      aism_in1 = (tm < N) ? aism_x1[fm][tm] : 1'b0;
      aism_in2 = (tm < N) ? aism_x2[fm][tm] : 1'b0;
      sisa_in1 = (ts >= N) ? sisa_x1[fs][ts-N] : 1'b0;
      sisa_in2 = (ts >= N && fs > 0) ? sisa_x2[fs-1][ts-N] : 1'b0;
      sism_in1 = (tm < N) ? sism_x1[fm][tm] : 1'b0;
      sism_in2 = (tm < N) ? sism_x2[fm][tm] : 1'b0;
      scsm_in1 = scsm_x1[fq][tq];
      scsm_in2 = scsm_x2[fq][tq];
      scsa4_in = NUM_IN'($urandom);
      scsa_in2 = 1'($urandom);
      for (int i = 0; i < NN_IN; i++) begin nn_x[i] = W'(nn_xs[fq][i]); nn_w[i] = (W+1)'(nn_ws[fq][i]); end
      #1;
      // multi-level: the SCSM output stream is the SCSA Input-1
      scsa_in1 = scsm_out;
      #1;
      // ---------------- checks ----------------
      check(sisa_frame_start == (ts == 0), "SISA frame start");
      check(sism_frame_start == (tm == 0), "SISM frame start");
      check(scsm_frame_start == (tq == 0), "SCSM frame start");

      aisa_got[ta] = aisa_out;
      if (ta == 2 * N - 1) begin
        check(aisa_got == {aisa_x2[fa], aisa_x1[fa]}, $sformatf("AISA op %0d", fa));
        n_aisa++;
      end

      aism_got[tm] = aism_out;
      if (tm == NSQ - 1) begin
        check($countones(aism_got) == $countones(aism_x1[fm]) * $countones(aism_x2[fm]),
              $sformatf("AISM op %0d", fm));
        n_aism++;
      end

      sisa_got[ts] = sisa_out;
      if (ts >= N && sisa_in2) n_sisa_in2_pass++;
      if (ts == 2 * N - 1 && fs > 0) begin
        check($countones(sisa_got) == $countones(sisa_x1[fs-1]) + $countones(sisa_x2[fs-1]),
              $sformatf("SISA op %0d", fs - 1));
        check(sisa_got[2*N-1:N] == sisa_x2[fs-1], $sformatf("SISA op %0d Input-2 half", fs - 1));
        if ($countones(sisa_x1[fs-1]) == N) n_full_scale++;
        n_sisa++;
      end

      sism_got[tm] = sism_out;
      if (tm == NSQ - 1 && fm > 0) begin
        check($countones(sism_got) == $countones(sism_x1[fm-1]) * $countones(sism_x2[fm-1]),
              $sformatf("SISM op %0d", fm - 1));
        if ($countones(sism_x1[fm-1]) == N) n_full_scale++;
        n_sism++;
      end

      // SCSM: product of frame f in cycles (f+1)N+1 .. (f+2)N
      if (scsm_reg_in2) n_scsm_sub++;
      if (c >= N + 1) begin
        int of, os, a, b;
        of = (c - 1) / N - 1; os = (c - 1) % N;
        scsm_got[os] = scsm_out;
        if (os == N - 1) begin
          a = $countones(scsm_x1[of]); b = $countones(scsm_x2[of]);
          check(scsm_got == scsm_model(a, b), $sformatf("SCSM frame %0d", of));
          if (N * $countones(scsm_got) != a * b) n_scsm_round++;
          if (of > 0) n_scsm_b2b++;
        end
      end

      // SCSA (transition table model), fed by the SCSM output
      if (scsa_in1 == scsa_in2) exp = scsa_in1;
      else begin exp = 1'(scsa_c); scsa_c = 1 - scsa_c; if (scsa_c == 1) n_scsa_carry++; end
      check(scsa_out == exp, $sformatf("SCSA cycle %0d", c));
      scsa_ones += int'(scsa_out); scsa_sum += int'(scsa_in1) + int'(scsa_in2);
      if (tq == N - 1) begin
        if (scsa_c == 1) n_scsa_round++;
        if (c >= 2 * N) n_multilevel++;
      end

      // SCSA4 (carry model)
      scsa4_c += $countones(scsa4_in);
      exp = (scsa4_c >= NUM_IN);
      if (exp) begin scsa4_c -= NUM_IN; n_scsa4_cout++; end
      check(scsa4_out == exp, $sformatf("SCSA4 cycle %0d", c));

      // perceptron (model: product streams, sign trees of two-input adders,
      // counters over slots 1..n, ReLU)
      check(nn_frame_start == (tq == 0), "NN frame start");
      for (int i = 0; i < NN_IN; i++) begin nn_pos[NN_IN+i] = 0; nn_neg[NN_IN+i] = 0; end
      if (c >= N + 1) begin
        int of, os, wv;
        bit pb;
        of = (c - 1) / N - 1; os = (c - 1) % N;
        for (int i = 0; i < NN_IN; i++) begin
          wv = nn_ws[of][i];
          pb = prod_stream(nn_xs[of][i], wv < 0 ? -wv : wv)[os];
          if (wv < 0) nn_neg[NN_IN+i] = pb; else nn_pos[NN_IN+i] = pb;
        end
      end
      for (int k = NN_IN - 1; k >= 1; k--) begin
        if (nn_pos[2*k] == nn_pos[2*k+1]) nn_pos[k] = nn_pos[2*k];
        else begin nn_pos[k] = nn_pc[k]; nn_pc[k] = ~nn_pc[k]; end
        if (nn_neg[2*k] == nn_neg[2*k+1]) nn_neg[k] = nn_neg[2*k];
        else begin nn_neg[k] = nn_nc[k]; nn_nc[k] = ~nn_nc[k]; end
      end
      nn_cp += nn_pos[1]; nn_cn += nn_neg[1];
      if (tq == 1 && c > N) begin
        check(nn_y_valid && int'(nn_y) == nn_yprev, $sformatf("NN cycle %0d: y=%0d expected %0d", c, nn_y, nn_yprev));
        if (c > 2 * N) begin
          if (nn_yprev == 0) n_relu_clip++; else n_relu_pass++;
        end
      end else check(!nn_y_valid, "NN stray y_valid");
      if (tq == 0 && c > 0) begin
        nn_yprev = nn_cp > nn_cn ? nn_cp - nn_cn : 0;
        nn_cp = 0; nn_cn = 0;
      end

      @(negedge clk);
    end
    // over the whole run the SCSA output is the halved total, within one bit
    check(scsa_ones == scsa_sum / 2, $sformatf("SCSA running total %0d vs %0d/2", scsa_ones, scsa_sum));
    #1 check(int'(scsa_carry) == scsa_c, "SCSA carry");

    $display("mechanisms: AISA ops %0d, AISM ops %0d, SISA ops %0d, SISM ops %0d", n_aisa, n_aism, n_sisa, n_sism);
    $display("mechanisms: SISA Input-2 bits through grounded mux %0d, full-scale operands %0d", n_sisa_in2_pass, n_full_scale);
    $display("mechanisms: SCSA carry stored %0d, SCSA rounded streams %0d, SCSA4 carry-outs %0d",
             n_scsa_carry, n_scsa_round, n_scsa4_cout);
    $display("mechanisms: SCSM carry subtractions %0d, SCSM rounded products %0d, back-to-back frames %0d, multi-level streams %0d",
             n_scsm_sub, n_scsm_round, n_scsm_b2b, n_multilevel);
    $display("mechanisms: perceptron results clipped by ReLU %0d, passed %0d", n_relu_clip, n_relu_pass);
    check(n_relu_clip > 0 && n_relu_pass > 0, "ReLU never clipped or never passed");
    check(n_aisa > 0 && n_aism > 0 && n_sisa > 0 && n_sism > 0, "an operation type never ran");
    check(n_sisa_in2_pass > 0, "SISA Input-2 phase never used");
    check(n_full_scale > 0, "no full-scale operand");
    check(n_scsa_carry > 0, "SCSA carry never stored");
    check(n_scsa_round > 0, "SCSA never rounded");
    check(n_scsa4_cout > 0, "SCSA4 never produced a carry-out");
    check(n_scsm_sub > 0, "SCSM never subtracted n from its carry");
    check(n_scsm_round > 0, "SCSM never rounded");
    check(n_scsm_b2b > 0, "SCSM never ran back to back");
    check(n_multilevel > 0, "no multi-level operation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
