// stream_counter: stream-to-binary up counter.
//
// Counts the 1s of a bit stream, one stream bit per clock cycle, which turns
// the stream's value into a binary number. A counter of log2(n)+1 bits holds
// every count 0..n of an n-bit stream. Besides the current count the module
// offers total = count + inc, the count that includes the bit being presented
// now; a register that samples total on the last bit of a frame captures the
// whole frame while the counter itself restarts.
//
// clear and load are synchronous and act at the end of the current cycle
// (clear wins over load); the current bit is then not added. In the original
// the counter feeding the constant-length multiplier's regenerator is loaded
// through asynchronous clear/preset pins; a synchronous load gives the same
// start value on the single clock.
//
// Interface: clk, rst_n (synchronous, active low), inc, clear, load,
// load_val[W-1:0], count[W-1:0], total[W-1:0]. Counting wraps modulo 2^W.
module stream_counter #(
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inc,
  input  logic         clear,
  input  logic         load,
  input  logic [W-1:0] load_val,
  output logic [W-1:0] count,
  output logic [W-1:0] total
);
  assign total = count + W'(inc);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) count <= '0;
    else if (load)       count <= load_val;
    else                 count <= total;
  end
endmodule
