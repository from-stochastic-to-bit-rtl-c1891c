// freq_divider: auxiliary-signal generator of the synchronous units.
//
// A chain of divide-by-two stages derives, from the bit clock, the square
// waves S0 (period 2 cycles), S1 (period 4), ... S(STAGES-1) (period
// 2^STAGES). They drive the selection inputs of the reconversion
// multiplexers, so together they name the slot of the current output frame.
// The original draws a ripple chain of toggle flip-flops; here the stages are
// one synchronous binary counter (bit k is S_k), so every flip-flop runs on the
// single bit clock.
//
// Outputs besides S: trig = NOT S(STAGES-1), the register trigger of the
// synchronous adder, and frame_end, high in the last cycle of each
// 2^STAGES-cycle frame (all S high; the same cycle in which the AND of CLK and
// all S, the trigger of the constant-length multiplier, pulses). Frame-end
// registers elsewhere load on the clock edge that closes a cycle with
// frame_end high, which is the edge at which trig rises.
//
// Interface: clk, rst_n (synchronous, active low; the frame restarts at slot
// 0 in the first cycle after reset), s, trig, frame_end.
module freq_divider #(
  parameter int unsigned STAGES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [STAGES-1:0] s,
  output logic              trig,
  output logic              frame_end
);
  always_ff @(posedge clk) begin
    if (!rst_n) s <= '0;
    else        s <= s + 1'b1;
  end

  assign trig      = ~s[STAGES-1];
  assign frame_end = &s;
endmodule
