// tb_wavelet_sweep: LED count against input frequency.
//
// Steady sinusoids from 5.40 kHz to 6.80 kHz in 20 Hz steps are quantised the
// way the ADC with gain -1 quantises a 1.25 V-amplitude input around 1.65 V,
// code = clip(floor(-(v - 1.65) / 1.25 * 8192), -8192, 8191), and fed to the
// wavelet filter and LED comparator at one sample per clock.  For each
// frequency the peak LED count after the 133 taps have filled is printed.
//
// Checks: 8 LEDs at 6.00 kHz; none at or below 5.50 kHz or at or above
// 6.50 kHz; the count never falls while approaching 6 kHz from either side;
// counts at 6 kHz - d and 6 kHz + d differ by at most one LED; every LED
// pattern is the bar expected from the response.
module tb_wavelet_sweep;

  import wavelet_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam int  NF = 71;              // 5400 .. 6800 Hz in 20 Hz steps

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    sample_en = 1'b0;
  sample_t sample_in = '0;
  part_t   re, im;
  resp_t   resp;
  logic    resp_valid;
  logic [7:0] led;
  int      checks = 0, failures = 0;
  int      peak_cnt = 0;
  int      bad_bar = 0;
  logic    chk_led = 1'b0;
  logic [7:0] exp_led;

  wavelet_filter u_wf (.clk, .rst, .sample_en, .sample_in, .re, .im, .resp, .resp_valid);
  led_ctrl       u_led (.clk, .rst, .resp, .resp_valid, .led);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [7:0] bar_of(input longint r);
    logic [7:0] e;
    longint m;
    m = longint'(RESP_MAX);
    for (int k = 1; k <= 8; k++) e[k-1] = ((r >>> 32) > ((k * m / 8 - m / 16) >>> 32));
    return e;
  endfunction

  function automatic int adc_code(input real v);
    real c;
    c = -(v - 1.65) / 1.25 * 8192.0;
    if (c >= 8191.0) return 8191;
    if (c <= -8192.0) return -8192;
    return int'($floor(c));
  endfunction

  always @(posedge clk) begin
    if (chk_led) begin
      if (led != exp_led) bad_bar++;
      chk_led <= 1'b0;
    end
    if (!rst && resp_valid) begin
      exp_led <= bar_of(longint'(resp));
      chk_led <= 1'b1;
      if ($countones(led) > peak_cnt) peak_cnt = $countones(led);
    end
  end

  int cnt [NF];

  initial begin
    real f;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < NF; i++) begin
      f = 5400.0 + 20.0 * i;
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        if (n == 150) peak_cnt = 0;
        sample_en = 1'b1;
        sample_in = sample_t'(adc_code(1.65 + 1.25 * $sin(2.0 * PI * f * n / 20000.0 + 0.7)));
      end
      @(negedge clk) sample_en = 1'b0;
      repeat (4) @(negedge clk);
      cnt[i] = peak_cnt;
      $display("%7.1f Hz  %0d LEDs", f, cnt[i]);
    end

    for (int i = 0; i < NF; i++) begin
      f = 5400.0 + 20.0 * i;
      if (f <= 5500.0 || f >= 6500.0) check(cnt[i] == 0, $sformatf("no LED at %0.0f Hz", f));
    end
    check(cnt[30] == 8, "all eight LEDs at 6.00 kHz");
    for (int i = 1; i <= 30; i++) check(cnt[i] >= cnt[i-1], $sformatf("count rises up to 6 kHz (%0d)", i));
    for (int i = 31; i < NF; i++) check(cnt[i] <= cnt[i-1], $sformatf("count falls after 6 kHz (%0d)", i));
    for (int d = 1; d <= 30; d++) begin
      int lo, hi;
      lo = cnt[30 - d];
      hi = cnt[30 + d];
      check(lo - hi <= 1 && hi - lo <= 1, $sformatf("symmetric at +-%0d Hz", 20 * d));
    end
    check(bad_bar == 0, $sformatf("%0d LED patterns differ from the expected bar", bad_bar));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NF * 420 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
