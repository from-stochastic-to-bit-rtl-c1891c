// sisa: synchronous increasing-stream-length adder (SISA).
//
// Computes the scaled sum (X1+X2)/2 of two n-bit streams exactly, as a 2n-bit
// output stream, with hardware that grows only with log n. Input-1 is counted
// into binary, the count is stored in a register and reconverted into a
// stream during the first n slots of the 2n-slot output frame; in the last n
// slots the multiplexer outputs 0 and Input-2 passes through the final OR gate
// instead.
//
// Structure, as published: a (log2 n + 1)-bit up counter, a register of the
// same width, OR gates in front of a (log2 n + 2)-input multiplexer whose last
// input is tied to 0, a (log2 n + 1)-stage frequency divider for the selection
// inputs, and an OR gate merging Input-2. The register is triggered when the
// divider's top output falls (TRIG = NOT S_top); here that is the synchronous
// frame_end enable. Clearing the counter at the same edge is this design's
// choice.
//
// Interface: clk, rst_n (synchronous, active low), in1, in2, out, frame_start
// (high in slot 0 of each 2n-cycle frame), sel (divider outputs = slot).
// Timing: the 1s of in1 counted during frame f (in1 must be 0 in its other
// slots) are sent out in slots 0..n-1 of frame f+1; in2 must be presented in
// slots n..2n-1 of frame f+1 (0 in slots 0..n-1). Frame f+1 on out then
// carries (X1+X2)/2 as a 2n-bit stream. One result every 2n cycles.
module sisa
  import bsc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in1,
  input  logic                  in2,
  output logic                  out,
  output logic                  frame_start,
  output logic [$clog2(N):0]    sel
);
  localparam int unsigned K = $clog2(N);
  localparam int unsigned W = count_width(N);

  logic         frame_end, trig;
  logic [W-1:0] count1, total1, reg1;
  logic         regen;

  freq_divider #(.STAGES(K + 1)) u_div (
    .clk      (clk),
    .rst_n    (rst_n),
    .s        (sel),
    .trig     (trig),
    .frame_end(frame_end)
  );

  stream_counter #(.W(W)) u_cnt (
    .clk     (clk),
    .rst_n   (rst_n),
    .inc     (in1),
    .clear   (frame_end),
    .load    (1'b0),
    .load_val('0),
    .count   (count1),
    .total   (total1)
  );

  // Register triggered at the end of each frame (rising edge of TRIG).
  always_ff @(posedge clk) begin
    if (!rst_n)         reg1 <= '0;
    else if (frame_end) reg1 <= total1;
  end

  stream_regen #(.K(K), .MSB_FIRST(1'b0)) u_regen (
    .r  (reg1),
    .sel(sel[K-1:0]),
    .out(regen)
  );

  // Multiplexer input I_(K+1) is tied to 0: while S_K is high the slot
  // belongs to Input-2.
  assign out         = (sel[K] ? 1'b0 : regen) | in2;
  assign frame_start = (sel == '0);

  // trig is the published register trigger; frame_end marks the same edge.
  logic unused_ok;
  assign unused_ok = &{1'b0, trig, count1};
endmodule
