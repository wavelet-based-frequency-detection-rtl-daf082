// tb_delayed_pulse_gen: self-checking test of the delayed pulse generator.
//
// For several resets of random length it checks that exactly one pulse comes,
// that it is one cycle wide, that it is high exactly three cycles (300 ns at
// 10 MHz) after reset is released, and that `done` is set with it and stays set.
module tb_delayed_pulse_gen;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic pulse, done;
  int   checks = 0, failures = 0;

  delayed_pulse_gen dut (.clk, .rst, .pulse, .done);

  always #50 clk = ~clk;   // 10 MHz

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int run = 0; run < 5; run++) begin
      int count, first;
      rst = 1'b1;
      repeat ($urandom_range(1, 6)) @(posedge clk);
      #1 rst = 1'b0;
      count = 0;
      first = -1;
      // cycle n = value after the n-th rising edge following reset release
      for (int n = 1; n <= 60; n++) begin
        @(posedge clk); #1;
        if (pulse) begin
          count++;
          if (first < 0) first = n;
        end
        if (n > 3) check(done == 1'b1, "done stays set after the pulse");
        if (n < 3) check(done == 1'b0, "done clear before the pulse");
      end
      check(count == 1, $sformatf("exactly one pulse (saw %0d)", count));
      check(first == 3, $sformatf("pulse three cycles after reset (saw %0d)", first));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
