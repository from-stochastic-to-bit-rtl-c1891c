// stream_regen: binary-to-stream reconversion (OR gates and multiplexer).
//
// Turns a count R = R_K..R_0 (0 .. n, n = 2^K) back into an n-bit stream. The
// selection inputs S_(K-1)..S_0 of a frequency divider walk through the n
// slots of a frame. The multiplexer gives one slot to I_0, one slot to I_K,
// two slots to I_1, four to I_2, ..., 2^(K-1) slots to I_(K-1). The data
// inputs are I_j = R_j OR R_K (j < K) and I_K = R_K: for R < n the stream
// holds R_0 + 2 R_1 + ... + 2^(K-1) R_(K-1) = R ones, and for R = n (only R_K
// set) every slot is 1.
//
// Slot order: with MSB_FIRST = 0, slot 0 takes I_0 and slot 1 takes I_K (the
// order of the published selection table of the synchronous adder); with
// MSB_FIRST = 1, slot 0 takes I_K and slot 1 takes I_0 (the order of the
// published reconverted streams of the synchronous multiplier, e.g. 3/4 ->
// 0,1,1,1). Slots 2^j .. 2^(j+1)-1 take I_j in both cases.
//
// Interface: r[K:0], sel[K-1:0] (slot number), out. Purely combinational.
module stream_regen #(
  parameter int unsigned K         = 3,
  parameter bit          MSB_FIRST = 1'b0
) (
  input  logic [K:0]   r,
  input  logic [K-1:0] sel,
  output logic         out
);
  logic [K:0] data;  // multiplexer data inputs I_0 .. I_K

  always_comb begin
    for (int j = 0; j < K; j++) data[j] = r[j] | r[K];
    data[K] = r[K];
  end

  always_comb begin
    out = 1'b0;
    if (sel == '0)
      out = MSB_FIRST ? data[K] : data[0];
    else if (sel == K'(1))
      out = MSB_FIRST ? data[0] : data[K];
    else
      for (int j = 1; j < K; j++)
        if (sel[j] && (sel >> (j + 1)) == '0) out = data[j];
  end
endmodule
