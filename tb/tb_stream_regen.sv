// tb_stream_regen: self-checking test of binary-to-stream reconversion.
// For n = 8 (K = 3) and every count 0..8 the n-slot stream must hold exactly
// that many ones, in both slot orders, and the slots must follow the
// published selection table (slot 0 -> R0|R3, slot 1 -> R3, slots 2-3 ->
// R1|R3, slots 4-7 -> R2|R3). For n = 4 with the R_K-first order the count 3
// must give 0,1,1,1, as in the published multiplier example.
module tb_stream_regen;
  logic [3:0] r8;
  logic [2:0] sel8;
  logic out8a, out8b;
  logic [2:0] r4;
  logic [1:0] sel4;
  logic out4;
  int checks = 0, failures = 0;

  stream_regen #(.K(3), .MSB_FIRST(1'b0)) dut_a (.r(r8), .sel(sel8), .out(out8a));
  stream_regen #(.K(3), .MSB_FIRST(1'b1)) dut_b (.r(r8), .sel(sel8), .out(out8b));
  stream_regen #(.K(2), .MSB_FIRST(1'b1)) dut_c (.r(r4), .sel(sel4), .out(out4));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int na, nb;
    bit [3:0] v;
    bit exp_bit;
    for (int r = 0; r <= 8; r++) begin
      na = 0; nb = 0;
      v = 4'(r);
      r8 = 4'(r);
      for (int s = 0; s < 8; s++) begin
        sel8 = 3'(s);
        #1;
        na += out8a; nb += out8b;
        if (s == 0)      exp_bit = v[0] | v[3];
        else if (s == 1) exp_bit = v[3];
        else if (s < 4)  exp_bit = v[1] | v[3];
        else             exp_bit = v[2] | v[3];
        check(out8a == exp_bit, $sformatf("table order r=%0d slot %0d: %b", r, s, out8a));
      end
      check(na == r, $sformatf("r=%0d table order gave %0d ones", r, na));
      check(nb == r, $sformatf("r=%0d R_K-first order gave %0d ones", r, nb));
    end
    begin
      bit [3:0] st;
      r4 = 3'd3;
      for (int s = 0; s < 4; s++) begin sel4 = 2'(s); #1 st[s] = out4; end
      check(st == 4'b1110, $sformatf("n=4 value 3 gave slots %b, expected 0,1,1,1", st));
      r4 = 3'd4;
      for (int s = 0; s < 4; s++) begin sel4 = 2'(s); #1 st[s] = out4; end
      check(st == 4'b1111, "n=4 value 4 not all ones");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
