// scsa: synchronous constant-stream-length adder for two inputs (SCSA).
//
// Averages two streams bit by bit, so the output has the same length as the
// inputs and successive streams can be processed back to back. When exactly
// one input bit is 1 the half that cannot be output is stored in a one-bit
// carry: the output is then the stored carry and the carry flips. When both
// bits are equal the output equals them and the carry is kept. In logic terms
// the output is the majority of (in1, in2, carry) and the next carry is
// in1 XOR in2 XOR carry, which is the published gate-level circuit.
//
// The result is exact when X1 and X2 have the same parity and otherwise off by
// half a bit (0.5/n). The carry starts at 0 after reset, as in the published
// worked example, so an odd sum is rounded down; it is not cleared between
// successive streams. The published circuit clocks the carry flip-flop on the
// inverted clock; here it is clocked on the rising edge that launches the
// input bits, so the output of each bit is computed from the carry left by the
// previous bit.
//
// Interface: clk, rst_n (synchronous, active low), in1, in2, out.
// Timing: out is combinational in the cycle its input bits are presented.
module scsa (
  input  logic clk,
  input  logic rst_n,
  input  logic in1,
  input  logic in2,
  output logic out,
  output logic carry
);
  always_ff @(posedge clk) begin
    if (!rst_n) carry <= 1'b0;
    else        carry <= in1 ^ in2 ^ carry;
  end

  assign out = (carry & in1) | (carry & in2) | (in1 & in2);
endmodule
