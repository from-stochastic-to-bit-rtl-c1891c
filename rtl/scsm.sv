// scsm: synchronous constant-stream-length multiplier (SCSM).
//
// Multiplies two n-bit streams into an n-bit stream, so successive operand
// pairs can be processed back to back; the product is rounded to the nearest
// 1/n. Both inputs are first counted (a = ones of Input-1, b = ones of
// Input-2) and then regenerated in the next frame as two new streams whose AND
// has about a*b/n ones:
//
//   REG_IN1: a ones followed by n-a zeros. A counter loaded with the inverted
//     count NOT(a) counts up once per cycle; REG_IN1 is 1 while it lies
//     between 01..1 and 11..10, which is true for exactly the first a cycles.
//   REG_IN2: error-diffused copy of b/n. A carry register starts at n/2 (the
//     carry of the algorithm shifted up by n/2 so it never goes negative); each
//     cycle a no-carry adder forms carry + b; its MSB is REG_IN2 and the other
//     bits (MSB forced to 0, i.e. n subtracted) become the next carry.
//
// Since REG_IN2 is spread evenly, its first a bits hold round(a*b/n) ones
// (half-way cases rounded up), so the AND of the two regenerated streams is
// the product to within 0.5/n.
//
// Structure, as published: up counters of log2 n + 1 bits for both inputs, a
// log2 n-stage divider whose all-ones state (TRIG) ends each frame, the
// regeneration core (scsm_regen: register for Input-2's count, no-carry adder
// with a carry register, second up counter for Input-1 with the range-decode
// gates), and one flip-flop on each regenerated stream before the AND gate. This design loads the second
// counter synchronously with the inverted total of the first at the frame end,
// in place of the register and asynchronous clear/preset transfer of the
// original; the start value is the same.
//
// Interface: clk, rst_n (synchronous, active low), in1, in2, out,
// frame_start (high in slot 0 of each n-cycle input frame), reg_in1/reg_in2
// (the regenerated streams, before their flip-flops), carry (carry register;
// its MSB is always 0 because the register's MSB input is tied to 0).
// Timing: operands presented in slots 0..n-1 of frame f; out carries their
// product in the n cycles starting two cycles after the last input bit, i.e.
// slots 1..n-1 of frame f+1 and slot 0 of frame f+2. Operands may follow each
// other without gaps: one result every n cycles.
module scsm
  import bsc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in1,
  input  logic                           in2,
  output logic                           out,
  output logic                           frame_start,
  output logic                           reg_in1,
  output logic                           reg_in2,
  output logic [count_width(N)-1:0]      carry
);
  localparam int unsigned K = $clog2(N);
  localparam int unsigned W = count_width(N);

  logic [K-1:0] sel;
  logic         frame_end, trig;
  logic [W-1:0] count1, total1;
  logic [W-1:0] count2, total2;
  logic         reg_in1_q, reg_in2_q;

  freq_divider #(.STAGES(K)) u_div (
    .clk(clk), .rst_n(rst_n), .s(sel), .trig(trig), .frame_end(frame_end)
  );

  stream_counter #(.W(W)) u_cnt1 (
    .clk(clk), .rst_n(rst_n), .inc(in1), .clear(frame_end),
    .load(1'b0), .load_val('0), .count(count1), .total(total1)
  );

  stream_counter #(.W(W)) u_cnt2 (
    .clk(clk), .rst_n(rst_n), .inc(in2), .clear(frame_end),
    .load(1'b0), .load_val('0), .count(count2), .total(total2)
  );

  // Regeneration core: counter 2 loaded with NOT(total1), carry register
  // loaded with n/2 and operand register with total2 at the frame end.
  scsm_regen #(.N(N)) u_regen (
    .clk(clk), .rst_n(rst_n), .load(frame_end), .a(total1), .b(total2),
    .reg_in1(reg_in1), .reg_in2(reg_in2), .carry(carry)
  );

  // Flip-flops on the regenerated streams, then the AND gate.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg_in1_q <= 1'b0;
      reg_in2_q <= 1'b0;
    end else begin
      reg_in1_q <= reg_in1;
      reg_in2_q <= reg_in2;
    end
  end

  assign out         = reg_in1_q & reg_in2_q;
  assign frame_start = (sel == '0);

  logic unused_ok;
  assign unused_ok = &{1'b0, trig, count1, count2};
endmodule
