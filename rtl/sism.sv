// sism: synchronous increasing-stream-length multiplier (SISM).
//
// Computes X1*X2 of two n-bit streams exactly, as an n^2-bit output stream.
// Every bit of one operand must meet every bit of the other: the count of
// Input-1 is reconverted by a fast multiplexer, so its n-bit stream repeats n
// times over the frame, and the count of Input-2 by a slow multiplexer whose
// selection inputs run n times slower, so each of its bits is held for n
// cycles. An AND gate of the two reconverted streams has X1*n * X2*n ones in
// n^2 slots. Only the counts of the inputs are kept, not the order of their
// bits.
//
// Structure, as published: per input a (log2 n + 1)-bit up counter, a
// register and OR gates in front of a (log2 n + 1)-input multiplexer; one AND
// gate. The fast multiplexer takes divider bits S_0..S_(K-1), the slow one
// S_K..S_(2K-1) (n = 2^K). The published circuit triggers the two registers
// from different divider outputs and uses one more divider stage; here both
// registers load at the end of each n^2-cycle frame and the counters clear at
// the same edge (this design's choice). Reconversion uses the slot order of
// the published example streams (the R_K-only input first).
//
// Interface: clk, rst_n (synchronous, active low), in1, in2, out,
// frame_start (high in slot 0 of each n^2-cycle frame), sel (divider outputs).
// Timing: in1 and in2 are counted during frame f (any n slots, 0 elsewhere);
// frame f+1 on out carries X1*X2 as an n^2-bit stream. One result every n^2
// cycles.
module sism
  import bsc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in1,
  input  logic                   in2,
  output logic                   out,
  output logic                   frame_start,
  output logic [2*$clog2(N)-1:0] sel
);
  localparam int unsigned K = $clog2(N);
  localparam int unsigned W = count_width(N);

  logic         frame_end, trig;
  logic [W-1:0] count1, total1, reg1;
  logic [W-1:0] count2, total2, reg2;
  logic         regen1, regen2;

  freq_divider #(.STAGES(2 * K)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .s        (sel),
    .trig     (trig),
    .frame_end(frame_end)
  );

  stream_counter #(.W(W)) u_cnt1 (
    .clk(clk), .rst_n(rst_n), .inc(in1), .clear(frame_end),
    .load(1'b0), .load_val('0), .count(count1), .total(total1)
  );

  stream_counter #(.W(W)) u_cnt2 (
    .clk(clk), .rst_n(rst_n), .inc(in2), .clear(frame_end),
    .load(1'b0), .load_val('0), .count(count2), .total(total2)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg1 <= '0;
      reg2 <= '0;
    end else if (frame_end) begin
      reg1 <= total1;
      reg2 <= total2;
    end
  end

  stream_regen #(.K(K), .MSB_FIRST(1'b1)) u_regen_fast (
    .r(reg1), .sel(sel[K-1:0]), .out(regen1)
  );

  stream_regen #(.K(K), .MSB_FIRST(1'b1)) u_regen_slow (
    .r(reg2), .sel(sel[2*K-1:K]), .out(regen2)
  );

  assign out         = regen1 & regen2;
  assign frame_start = (sel == '0);

  logic unused_ok;
  assign unused_ok = &{1'b0, trig, count1, count2};
endmodule
