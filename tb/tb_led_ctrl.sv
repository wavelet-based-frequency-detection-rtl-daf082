// tb_led_ctrl: self-checking test of the LED bar-graph comparator.
//
// The testbench works out the eight thresholds itself, k*RESP_MAX/8 -
// RESP_MAX/16 for k = 1..8, takes bits 49..32 of each, and expects LED k-1 on
// exactly when bits 49..32 of the response are above that value.  It drives
// responses at each threshold slice, one below and one above it, plus random
// responses over the whole range, and checks that the LEDs change only on
// resp_valid, one cycle later, and form a bar (LEDs fill from LED 0 upward).
module tb_led_ctrl;

  import wavelet_pkg::*;

  logic        clk = 1'b0;
  logic        rst = 1'b1;
  resp_t       resp = '0;
  logic        resp_valid = 1'b0;
  logic [7:0]  led;
  int          checks = 0, failures = 0;
  longint      thr_hi [1:8];

  led_ctrl dut (.clk, .rst, .resp, .resp_valid, .led);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [7:0] expected(input longint r);
    logic [7:0] e;
    for (int k = 1; k <= 8; k++) e[k-1] = ((r >>> 32) > thr_hi[k]);
    return e;
  endfunction

  task automatic apply(input longint r);
    logic [7:0] led_prev, e;
    led_prev = led;
    @(negedge clk);
    resp = resp_t'(r);
    resp_valid = 1'b0;
    @(negedge clk);
    check(led == led_prev, "LEDs hold without resp_valid");
    resp_valid = 1'b1;
    @(negedge clk);
    resp_valid = 1'b0;
    resp = resp_t'($urandom);       // must not matter now
    e = expected(r);
    check(led == e, $sformatf("resp %0d: led %b, expected %b", r, led, e));
    check(((led + 8'd1) & led) == 8'd0, "LEDs form a bar");
  endtask

  initial begin
    longint m;
    m = longint'(RESP_MAX);
    for (int k = 1; k <= 8; k++) thr_hi[k] = (k * m / 8 - m / 16) >>> 32;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    check(led == 8'h00, "LEDs off after reset");

    apply(0);
    for (int k = 1; k <= 8; k++) begin
      apply((thr_hi[k] << 32));                    // slice equal: not above
      apply((thr_hi[k] << 32) + 64'hFFFF_FFFF);    // still equal in bits 49..32
      apply((thr_hi[k] + 1) << 32);                // one step above
      apply(((thr_hi[k] - 1) << 32));
    end
    apply(m);
    check(led == 8'hFF, "full-scale response lights all eight LEDs");
    apply(m / 32);
    check(led == 8'h00, "1/32 of full scale lights none");
    for (int i = 0; i < 500; i++) apply(longint'({$urandom, $urandom} >> 1) % (m + m / 4));

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
