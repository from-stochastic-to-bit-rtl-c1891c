// bsc_top: the six bit-stream arithmetic circuits and a perceptron on one clock.
//
// Bit-stream computing represents a value in [0,1] by the fraction of 1s in a
// unary bit stream, like stochastic computing, but builds its adders and
// multipliers so that the result depends only on the number of 1s in the
// operands, never on where they sit. This top places the six circuits of the
// family side by side, each with its own stream ports:
//
//   AISA / AISM   delay-line adder and multiplier (exact; output 2n / n^2 bits)
//   SISA / SISM   counter-register-multiplexer adder and multiplier (exact;
//                 output 2n / n^2 bits, frames marked by *_frame_start)
//   SCSA          two-input constant-length adder (output n bits, +-0.5/n)
//   SCSA4         NUM_IN-input constant-length adder
//   SCSM          constant-length multiplier (output n bits, +-0.5/n)
//   NN            one perceptron built from binary-to-stream multipliers, a
//                 tree of two-input constant-length adders, counters and ReLU
//
// All units share the bit clock and the synchronous active-low reset, so their
// frame counters start together in the cycle after reset. Outputs of one unit
// may be fed, unchanged, to the inputs of another (multi-level operation): the
// units only count 1s. Stream timing of each unit is described in its own
// module. The circuits are published as separate designs; gathering them
// behind one clock and reset is this design's choice.
module bsc_top
  import bsc_pkg::*;
#(
  parameter int unsigned N      = 8,
  parameter int unsigned NUM_IN = 4,
  parameter int unsigned NN_IN  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // asynchronous increasing-length adder / multiplier
  input  logic              aisa_in1,
  input  logic              aisa_in2,
  output logic              aisa_out,
  input  logic              aism_in1,
  input  logic              aism_in2,
  output logic              aism_out,
  // synchronous increasing-length adder / multiplier
  input  logic              sisa_in1,
  input  logic              sisa_in2,
  output logic              sisa_out,
  output logic              sisa_frame_start,
  input  logic              sism_in1,
  input  logic              sism_in2,
  output logic              sism_out,
  output logic              sism_frame_start,
  // synchronous constant-length adders / multiplier
  input  logic              scsa_in1,
  input  logic              scsa_in2,
  output logic              scsa_out,
  output logic              scsa_carry,
  input  logic [NUM_IN-1:0] scsa4_in,
  output logic              scsa4_out,
  input  logic              scsm_in1,
  input  logic              scsm_in2,
  output logic              scsm_out,
  output logic              scsm_frame_start,
  output logic              scsm_reg_in2,
  // perceptron
  input  logic        [count_width(N)-1:0] nn_x [NN_IN],
  input  logic signed [count_width(N):0]   nn_w [NN_IN],
  output logic        [count_width(N)-1:0] nn_y,
  output logic                             nn_y_valid,
  output logic                             nn_frame_start
);
  logic [$clog2(N):0]         sisa_sel;
  logic [2*$clog2(N)-1:0]     sism_sel;
  logic [$clog2(NUM_IN)-1:0]  scsa4_carry;
  logic                       scsm_reg_in1;
  logic [count_width(N)-1:0]  scsm_carry;

  aisa #(.N(N)) u_aisa (
    .clk(clk), .rst_n(rst_n), .in1(aisa_in1), .in2(aisa_in2), .out(aisa_out)
  );

  aism #(.N(N)) u_aism (
    .clk(clk), .rst_n(rst_n), .in1(aism_in1), .in2(aism_in2), .out(aism_out)
  );

  sisa #(.N(N)) u_sisa (
    .clk(clk), .rst_n(rst_n), .in1(sisa_in1), .in2(sisa_in2), .out(sisa_out),
    .frame_start(sisa_frame_start), .sel(sisa_sel)
  );

  sism #(.N(N)) u_sism (
    .clk(clk), .rst_n(rst_n), .in1(sism_in1), .in2(sism_in2), .out(sism_out),
    .frame_start(sism_frame_start), .sel(sism_sel)
  );

  scsa u_scsa (
    .clk(clk), .rst_n(rst_n), .in1(scsa_in1), .in2(scsa_in2), .out(scsa_out),
    .carry(scsa_carry)
  );

  scsa_multi #(.NUM_IN(NUM_IN)) u_scsa4 (
    .clk(clk), .rst_n(rst_n), .in_bits(scsa4_in), .out(scsa4_out),
    .carry(scsa4_carry)
  );

  scsm #(.N(N)) u_scsm (
    .clk(clk), .rst_n(rst_n), .in1(scsm_in1), .in2(scsm_in2), .out(scsm_out),
    .frame_start(scsm_frame_start), .reg_in1(scsm_reg_in1),
    .reg_in2(scsm_reg_in2), .carry(scsm_carry)
  );

  nn_neuron #(.NUM_IN(NN_IN), .N(N)) u_nn (
    .clk(clk), .rst_n(rst_n), .x(nn_x), .w(nn_w), .y(nn_y), .y_valid(nn_y_valid),
    .frame_start(nn_frame_start)
  );

  logic unused_ok;
  assign unused_ok = &{1'b0, sisa_sel, sism_sel, scsa4_carry, scsm_reg_in1,
                       scsm_carry};
endmodule
