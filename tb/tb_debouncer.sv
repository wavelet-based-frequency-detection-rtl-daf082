// tb_debouncer: self-checking test of the two-flip-flop debouncer.
//
// With an 8-cycle sample period it checks that: a press and a release with
// bounce shorter than one sample period give exactly one rising and one
// falling output edge; the output settles to the button level within two
// sample periods after the bounce ends; and a one-cycle glitch placed at every
// phase of the sample period never reaches the output.
module tb_debouncer;

  localparam int unsigned TICKS = 8;

  logic clk = 1'b0;
  logic btn = 1'b0;
  logic out;
  int   checks = 0, failures = 0;
  int   rises = 0, falls = 0;
  logic out_d = 1'b0;

  debouncer #(.SAMPLE_TICKS(TICKS)) dut (.clk, .btn_in(btn), .btn_out(out));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    out_d <= out;
    if (out && !out_d) rises++;
    if (!out && out_d) falls++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic bounce_to(input logic level);
    for (int i = 0; i < TICKS - 2; i++) begin
      @(negedge clk) btn = logic'($urandom_range(0, 1));
    end
    @(negedge clk) btn = level;
  endtask

  initial begin
    repeat (5 * TICKS) @(negedge clk);
    check(out == 1'b0, "output low at start");

    for (int press = 0; press < 6; press++) begin
      int r0, f0;
      r0 = rises;
      f0 = falls;
      bounce_to(1'b1);
      repeat (2 * TICKS + 2) @(negedge clk);
      check(out == 1'b1, "output high within two sample periods of a press");
      check(rises == r0 + 1 && falls == f0, "one clean rising edge per press");
      repeat (3 * TICKS) @(negedge clk);
      bounce_to(1'b0);
      repeat (2 * TICKS + 2) @(negedge clk);
      check(out == 1'b0, "output low within two sample periods of a release");
      check(rises == r0 + 1 && falls == f0 + 1, "one clean falling edge per release");
      repeat (3 * TICKS) @(negedge clk);
    end

    // Single-cycle glitches at every phase of the sample period.
    for (int ph = 0; ph < 2 * TICKS; ph++) begin
      int r0;
      r0 = rises;
      repeat (ph) @(negedge clk);
      btn = 1'b1;
      @(negedge clk) btn = 1'b0;
      repeat (3 * TICKS) @(negedge clk);
      check(rises == r0 && out == 1'b0, $sformatf("glitch at phase %0d filtered", ph));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
