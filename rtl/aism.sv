// aism: asynchronous increasing-stream-length multiplier (AISM).
//
// Computes X1*X2 of two n-bit streams exactly, as an n^2-bit output stream.
// Every bit of Input-1 has to meet every bit of Input-2 in some AND gate, in a
// time slot of its own. The circuit feeds 2n-1 AND gates with delayed copies of
// both inputs: gate 1 sees both undelayed (pairs bit k with bit k), gates
// 2..n pair later bits of Input-1 with earlier bits of Input-2, gates n+1..2n-1
// the opposite. The delays are chosen so that the n^2 bit pairs fall into n^2
// distinct slots; a (2n-1)-input OR gate merges the gates into the product.
//
// The gate structure and the delay of each gate follow the published
// delay-difference formulas (see bsc_pkg). Each input's delay chain is
// written as one tapped delay line, clocked once per bit duration, in place of
// the original inverter chains.
//
// Interface: clk (bit clock), rst_n (synchronous, active low), in1, in2
// (presented in the same n slots, 0 afterwards), out.
// Timing: output slot t (t = 0 .. n^2-1) is valid in the cycle in which input
// slot t would be presented; the inputs must stay 0 after slot n-1 until the
// n^2 output slots have been read.
module aism
  import bsc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in1,
  input  logic in2,
  output logic out
);
  localparam int unsigned GATES = 2 * N - 1;
  localparam int unsigned LEN1  = N * N - (N - 1); // largest Input-1 delay
  localparam int unsigned LEN2  = N * N - N;       // largest Input-2 delay

  logic [LEN1:0]    taps1;
  logic [LEN2:0]    taps2;
  logic [GATES-1:0] prod;

  delay_line #(.LEN(LEN1)) u_delay1 (
    .clk  (clk),
    .rst_n(rst_n),
    .din  (in1),
    .taps (taps1)
  );

  delay_line #(.LEN(LEN2)) u_delay2 (
    .clk  (clk),
    .rst_n(rst_n),
    .din  (in2),
    .taps (taps2)
  );

  for (genvar g = 1; g <= GATES; g++) begin : g_and
    localparam int D1 = aism_delay1(N, g);
    localparam int D2 = aism_delay2(N, g);
    assign prod[g-1] = taps1[D1] & taps2[D2];
  end

  assign out = |prod;
endmodule
