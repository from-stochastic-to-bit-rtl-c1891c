// scsm_regen: operand regeneration core of the constant-length multiplier.
//
// Given two binary operands a and b (0 .. n), produces during the next n
// cycles two streams whose AND is the product a*b/n rounded to the nearest
// 1/n:
//   reg_in1: a ones followed by n-a zeros. A counter loaded with NOT(a) counts
//     up once per cycle; reg_in1 is 1 while it lies between 01..1 and 11..10,
//     which holds for exactly the first a cycles.
//   reg_in2: error-diffused copy of b/n. A carry register starts at n/2 (the
//     signed carry of the regeneration algorithm, shifted up by n/2 so it never
//     goes negative); each cycle a no-carry adder forms carry + b, its MSB is
//     reg_in2 and its other bits (MSB forced to 0, i.e. n subtracted) become the
//     next carry.
// The gates follow the published multiplier. Used by the stream-to-stream
// multiplier (scsm, after its input counters) and, with binary operands
// directly, as the binary-to-stream multiplier of the neuron.
//
// Interface: clk, rst_n (synchronous, active low), load (end of frame: the
// operands are taken at this clock edge), a, b, reg_in1, reg_in2 (combinational
// from the registers), carry (its MSB is always 0: the MSB input of the carry
// register is tied to 0, as published; the port keeps the full register width).
// Timing: reg_in1/reg_in2 for operand slot i (i = 0 .. n-1) appear i cycles
// after the load edge.
module scsm_regen
  import bsc_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [count_width(N)-1:0] a,
  input  logic [count_width(N)-1:0] b,
  output logic                      reg_in1,
  output logic                      reg_in2,
  output logic [count_width(N)-1:0] carry
);
  localparam int unsigned W = count_width(N);

  logic [W-1:0] c2, c2_total;
  logic [W-1:0] breg;
  logic [W-1:0] nca;

  // Counter that regenerates Input-1: starts from NOT(a), counts every cycle.
  stream_counter #(.W(W)) u_cnt_regen (
    .clk(clk), .rst_n(rst_n), .inc(1'b1), .clear(1'b0),
    .load(load), .load_val(~a), .count(c2), .total(c2_total)
  );

  // Range decode: 01..1 <= c2 <= 11..10.
  assign reg_in1 = ( c2[W-1] & ~(&c2[W-2:0])) |
                   (~c2[W-1] &  (&c2[W-2:0]));

  // No-carry adder and carry register (starts from n/2 = 01..0 each frame,
  // MSB of its input tied to 0).
  assign nca     = breg + carry;
  assign reg_in2 = nca[W-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      breg  <= '0;
      carry <= W'(N / 2);
    end else if (load) begin
      breg  <= b;
      carry <= W'(N / 2);
    end else begin
      carry <= {1'b0, nca[W-2:0]};
    end
  end

  logic unused_ok;
  assign unused_ok = &{1'b0, c2_total};
endmodule
