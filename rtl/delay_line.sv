// delay_line: tapped bit-stream delay, one stage per bit duration.
//
// The asynchronous adder and multiplier hold a stream back by a whole number
// of bit durations. In the original circuits each delay block is a chain of
// inverters tuned so that its propagation delay equals k bit durations; a chain
// of such blocks is tapped between blocks. Analog inverter delay cannot be
// written as logic, so here the same delay is produced by a shift register
// clocked once per bit duration: taps[k] is din delayed by k bits, taps[0] is
// din itself. A chain of delay blocks of lengths d1, d2, ... corresponds to the
// taps d1, d1+d2, ... of one line.
//
// Interface: clk (bit clock), rst_n (synchronous, active low, clears the line
// so that no stale 1s appear), din, taps[LEN:0].
// Timing: taps[k] at cycle t equals din at cycle t-k.
module delay_line #(
  parameter int unsigned LEN = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         din,
  output logic [LEN:0] taps
);
  logic [LEN:1] sr;

  if (LEN == 1) begin : g_one
    always_ff @(posedge clk) begin
      if (!rst_n) sr <= '0;
      else        sr <= din;
    end
  end else begin : g_many
    always_ff @(posedge clk) begin
      if (!rst_n) sr <= '0;
      else        sr <= {sr[LEN-1:1], din};
    end
  end

  assign taps = {sr, din};
endmodule
