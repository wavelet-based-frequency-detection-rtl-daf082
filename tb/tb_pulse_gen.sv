// tb_pulse_gen: self-checking test of the 20 kHz sample pulse generator at its
// full 500-cycle period.
//
// Checks: no pulse while IDLE; after a one-cycle do_run the first pulse comes
// 500 cycles later and the following ones every 500 cycles (20 kHz at 10 MHz),
// each one cycle wide; the generator keeps running with do_run low; reset
// returns it to IDLE.
module tb_pulse_gen;

  logic clk = 1'b0;
  logic rst = 1'b1;
  logic do_run = 1'b0;
  logic pulse;
  int   checks = 0, failures = 0;
  longint cyc = 0;

  pulse_gen dut (.clk, .rst, .do_run, .pulse);

  always #50 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic expect_quiet(input int n);
    int seen = 0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #1;
      if (pulse) seen++;
    end
    check(seen == 0, "no pulse while idle");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    expect_quiet(1200);

    for (int round = 0; round < 2; round++) begin
      longint start, last;
      int n;
      @(negedge clk) do_run = 1'b1;
      @(posedge clk);                 // edge that samples do_run
      #1 start = cyc;
      do_run = 1'b0;
      last = start;
      n = 0;
      while (n < 25) begin
        @(posedge clk); #1;
        if (pulse) begin
          check(cyc - last == 500, $sformatf("pulse spacing %0d, expected 500", cyc - last));
          last = cyc;
          n++;
          @(posedge clk); #1;
          check(!pulse, "pulse is one cycle wide");
        end
        if (cyc - start > 500 * 30) break;
      end
      check(n == 25, "25 pulses seen");
      @(negedge clk) rst = 1'b1;
      @(negedge clk) rst = 1'b0;
      expect_quiet(1200);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
