// aisa: asynchronous increasing-stream-length adder (AISA).
//
// Computes the scaled sum (X1+X2)/2 of two n-bit streams exactly, as a 2n-bit
// output stream. Input-1 passes straight to an OR gate; Input-2 reaches the
// same OR gate through an n-bit delay, so its bits land in the n slots after
// Input-1 has ended and no 1 of one input can hide a 1 of the other. The
// output therefore holds X1*n + X2*n ones in 2n slots.
//
// The adder structure (one n-bit delay and one OR gate) is the published one.
// The delay, an inverter chain in the original asynchronous circuit, is here a
// shift register clocked once per bit duration (see delay_line).
//
// Interface: clk (bit clock), rst_n (synchronous, active low), in1, in2
// (both streams presented in the same n slots, 0 afterwards), out.
// Timing: out is combinational from in1 and the delay line; output slot t
// (t = 0 .. 2n-1) is valid in the cycle that in1 slot t is presented.
module aisa #(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in1,
  input  logic in2,
  output logic out
);
  logic [N:0] taps2;

  delay_line #(.LEN(N)) u_delay (
    .clk  (clk),
    .rst_n(rst_n),
    .din  (in2),
    .taps (taps2)
  );

  assign out = in1 | taps2[N];
endmodule
