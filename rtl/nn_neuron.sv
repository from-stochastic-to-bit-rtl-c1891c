// nn_neuron: one perceptron of a fully connected network in bit-stream
// arithmetic (constant-stream-length variant).
//
// Computes ReLU(sum_i x_i * w_i) for NUM_IN binary inputs x_i (0 .. n) and
// signed binary weights w_i (-n .. n). Following the network organisation
// described with the arithmetic circuits, each input and its weight are
// multiplied by a binary-to-stream multiplier (the regeneration core of the
// constant-length multiplier, fed with the binary operands directly), the
// product streams are summed in pairs by a binary tree of two-input
// constant-length adders, the resulting stream is counted back to binary, and
// the rest is ordinary binary logic: here the ReLU.
//
// The source does not say how negative weights are handled. This design
// splits the products by weight sign: positive products enter one adder tree,
// negative products another, each tree is counted, and the ReLU is applied to
// the difference of the two counts. NUM_IN is padded with zero streams to the
// next power of two P, so each tree has log2(P) adder levels and its output
// stream carries (sum of its products)/P.
//
// Scaling: with x_i/n and |w_i|/n as stream values, y/n approximates
// max(0, sum_i (x_i/n)(w_i/n)) / P; every multiplier and every adder rounds to
// a whole bit, so y is within a few counts of the exact value (see the
// testbench for the bound used).
//
// Interface: clk, rst_n (synchronous, active low), x[NUM_IN] (unsigned,
// log2 n + 1 bits), w[NUM_IN] (two's complement, log2 n + 2 bits), y
// (unsigned, log2 n + 1 bits), y_valid (one-cycle strobe), frame_start.
// Timing: x and w are sampled at the end of each n-cycle frame (the cycle
// before frame_start); y for the operands sampled at the end of frame f is
// presented with y_valid from slot 1 of frame f+2 and held until the next
// y_valid. One result per n cycles.
module nn_neuron
  import bsc_pkg::*;
#(
  parameter int unsigned NUM_IN = 16,
  parameter int unsigned N      = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic        [count_width(N)-1:0] x [NUM_IN],
  input  logic signed [count_width(N):0]   w [NUM_IN],
  output logic        [count_width(N)-1:0] y,
  output logic                             y_valid,
  output logic                             frame_start
);
  localparam int unsigned K = $clog2(N);
  localparam int unsigned W = count_width(N);
  localparam int unsigned P = 1 << $clog2(NUM_IN);   // padded tree width

  logic [K-1:0] sel;
  logic         frame_end, trig, frame_end_q;

  freq_divider #(.STAGES(K)) u_div (
    .clk(clk), .rst_n(rst_n), .s(sel), .trig(trig), .frame_end(frame_end)
  );

  // ---------------- binary-to-stream multipliers ----------------
  logic [NUM_IN-1:0] r1, r2, r1_q, r2_q, neg_q, prod;
  logic [NUM_IN-1:0] neg;

  for (genvar i = 0; i < NUM_IN; i++) begin : g_mul
    logic [W-1:0] wmag;
    logic [W-1:0] carry_unused;
    logic         unused_mag_ok;
    logic [W:0]   wabs;
    assign wabs = w[i][W] ? (W+1)'(-w[i]) : (W+1)'(w[i]);
    assign wmag = wabs[W-1:0];
    assign unused_mag_ok = wabs[W];  // |w| <= n fits in W bits

    scsm_regen #(.N(N)) u_regen (
      .clk(clk), .rst_n(rst_n), .load(frame_end), .a(x[i]), .b(wmag),
      .reg_in1(r1[i]), .reg_in2(r2[i]), .carry(carry_unused)
    );

    // weight sign, held for the frame in which the product is sent
    always_ff @(posedge clk) begin
      if (!rst_n)         neg[i] <= 1'b0;
      else if (frame_end) neg[i] <= w[i][W];
    end
  end

  // flip-flops on the regenerated streams, then the AND gates
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r1_q  <= '0;
      r2_q  <= '0;
      neg_q <= '0;
    end else begin
      r1_q  <= r1;
      r2_q  <= r2;
      neg_q <= neg;
    end
  end

  assign prod = r1_q & r2_q;

  // ---------------- adder trees (heap order: node k adds 2k and 2k+1) -------
  logic [2*P-1:1] pos_s, neg_s;

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < NUM_IN) begin : g_used
      assign pos_s[P+i] = prod[i] & ~neg_q[i];
      assign neg_s[P+i] = prod[i] &  neg_q[i];
    end else begin : g_pad
      assign pos_s[P+i] = 1'b0;
      assign neg_s[P+i] = 1'b0;
    end
  end

  for (genvar k = 1; k < P; k++) begin : g_node
    logic cp_unused, cn_unused;
    scsa u_pos (.clk(clk), .rst_n(rst_n), .in1(pos_s[2*k]), .in2(pos_s[2*k+1]),
                .out(pos_s[k]), .carry(cp_unused));
    scsa u_neg (.clk(clk), .rst_n(rst_n), .in1(neg_s[2*k]), .in2(neg_s[2*k+1]),
                .out(neg_s[k]), .carry(cn_unused));
  end

  // ---------------- stream-to-binary and ReLU ----------------
  // The product streams lag the frame by one cycle (output flip-flops), so
  // the counting window closes one cycle after frame_end.
  logic [W-1:0] cnt_p, tot_p, cnt_n, tot_n;

  always_ff @(posedge clk) begin
    if (!rst_n) frame_end_q <= 1'b0;
    else        frame_end_q <= frame_end;
  end

  stream_counter #(.W(W)) u_cnt_pos (
    .clk(clk), .rst_n(rst_n), .inc(pos_s[1]), .clear(frame_end_q),
    .load(1'b0), .load_val('0), .count(cnt_p), .total(tot_p)
  );

  stream_counter #(.W(W)) u_cnt_neg (
    .clk(clk), .rst_n(rst_n), .inc(neg_s[1]), .clear(frame_end_q),
    .load(1'b0), .load_val('0), .count(cnt_n), .total(tot_n)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= frame_end_q;
      if (frame_end_q) y <= (tot_p > tot_n) ? tot_p - tot_n : '0;
    end
  end

  assign frame_start = (sel == '0);

  logic unused_ok;
  assign unused_ok = &{1'b0, trig, cnt_p, cnt_n};
endmodule
