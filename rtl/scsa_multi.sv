// scsa_multi: synchronous constant-stream-length adder for NUM_IN inputs.
//
// Generalises the two-input constant-length adder to i = NUM_IN inputs. In
// every cycle a parallel counter counts the 1s among the i input bits; a
// binary adder adds that count to a carry register. When the sum reaches i the
// output bit is 1 and i is taken off the sum; the remainder becomes the new
// carry. The output stream thus carries (X1+...+Xi)/i with the same length as
// the inputs, rounded to a whole bit. The carry starts at INIT_CARRY = i/2 so
// that the result is rounded to the nearest value; for a power-of-two i the
// output is the carry-out and the new carry the sum of a modulo-i adder, as in
// the published four-input circuit (parallel counter, "binary adder & output"
// block, 2-bit carry register). The carry is not cleared between streams.
//
// Interface: clk, rst_n (synchronous, active low; loads INIT_CARRY),
// in_bits[NUM_IN-1:0] (one bit of each input stream), out, carry.
// Timing: out is combinational in the cycle the input bits are presented.
module scsa_multi #(
  parameter int unsigned NUM_IN     = 4,
  parameter int unsigned INIT_CARRY = NUM_IN / 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NUM_IN-1:0]           in_bits,
  output logic                        out,
  output logic [$clog2(NUM_IN)-1:0]   carry
);
  localparam int unsigned CW = $clog2(NUM_IN);       // carry register width
  localparam int unsigned SW = $clog2(2 * NUM_IN);   // width of count + carry

  logic [SW-1:0] pcount;   // parallel counter output
  logic [SW-1:0] sum;
  logic [CW-1:0] rest;

  always_comb begin
    pcount = '0;
    for (int k = 0; k < NUM_IN; k++) pcount = pcount + SW'(in_bits[k]);
  end

  assign sum  = pcount + SW'(carry);
  assign out  = (sum >= SW'(NUM_IN));
  assign rest = CW'(out ? sum - SW'(NUM_IN) : sum);

  always_ff @(posedge clk) begin
    if (!rst_n) carry <= CW'(INIT_CARRY);
    else        carry <= rest;
  end
endmodule
