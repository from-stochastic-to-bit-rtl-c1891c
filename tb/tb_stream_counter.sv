// tb_stream_counter: self-checking test of the stream-to-binary counter.
// Random stream bits, clears and loads; a behavioural counter in the
// testbench gives the expected count and total every cycle.
module tb_stream_counter;
  localparam int unsigned W = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic inc = 1'b0, clear = 1'b0, load = 1'b0;
  logic [W-1:0] load_val = '0, count, total;
  int checks = 0, failures = 0;
  int model;

  stream_counter #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .inc(inc), .clear(clear), .load(load),
                               .load_val(load_val), .count(count), .total(total));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    model = 0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      inc = 1'($urandom_range(0, 1));
      clear = ($urandom_range(0, 15) == 0);
      load = ($urandom_range(0, 15) == 0);
      load_val = W'($urandom);
      #1;
      check(count == W'(model), $sformatf("t=%0d count %0d expected %0d", t, count, model));
      check(total == W'(model + inc), $sformatf("t=%0d total %0d", t, total));
      if (clear) model = 0;
      else if (load) model = int'(load_val);
      else model = (model + inc) % (1 << W);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
