// tb_wavelet_chirp: the chirp workload.  A full-scale linear chirp from 1 kHz
// to 10 kHz over 10 s, sampled at 20 ksps and quantised to 14 bits
// (trunc(8191 * x)), 200,000 samples in all, is passed through the wavelet
// filter and the LED comparator, one sample per clock.
//
// Checks: the response peaks where the chirp passes 6 kHz, at
// t = (6000 - 1000) / 900 = 5.56 s (accepted 5.3 s to 5.8 s); the peak lies
// between 90% and 101% of the full-scale response RESP_MAX; away from the
// pass band (before 4.5 s and after 6.6 s) the response stays below
// RESP_MAX/16 and no LED lights; all eight LEDs light only between 5.3 s and
// 5.8 s; every LED pattern is the bar expected from the response.
module tb_wavelet_chirp;

  import wavelet_pkg::*;

  localparam real PI  = 3.14159265358979;
  localparam real FS  = 20000.0;
  localparam real F0  = 1000.0;
  localparam real K   = 900.0;       // Hz per second
  localparam int  N   = 200_000;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    sample_en = 1'b0;
  sample_t sample_in = '0;
  part_t   re, im;
  resp_t   resp;
  logic    resp_valid;
  logic [7:0] led;
  int      checks = 0, failures = 0;

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

  int     n_out = 0;          // index of the sample the current response belongs to
  longint peak = 0;
  int     peak_idx = 0;
  int     bad_far = 0, bad_led8 = 0, n_led8 = 0, bad_bar = 0;
  logic   chk_led = 1'b0;
  logic [7:0] exp_led;

  function automatic logic [7:0] bar_of(input longint r);
    logic [7:0] e;
    longint m;
    m = longint'(RESP_MAX);
    for (int k = 1; k <= 8; k++) e[k-1] = ((r >>> 32) > ((k * m / 8 - m / 16) >>> 32));
    return e;
  endfunction

  always @(posedge clk) begin
    if (chk_led) begin
      if (led != exp_led) bad_bar++;
      chk_led <= 1'b0;
    end
    if (!rst && resp_valid) begin
      real t;
      t = real'(n_out) / FS;
      if (longint'(resp) > peak) begin
        peak = longint'(resp);
        peak_idx = n_out;
      end
      if ((t < 4.5 || t > 6.6) && longint'(resp) >= longint'(RESP_MAX) / 16) bad_far++;
      exp_led <= bar_of(longint'(resp));
      chk_led <= 1'b1;
      if (bar_of(longint'(resp)) == 8'hFF) begin
        n_led8++;
        if (t < 5.3 || t > 5.8) bad_led8++;
      end
      n_out++;
    end
  end

  initial begin
    real t, peak_t, ratio;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < N; n++) begin
      t = real'(n) / FS;
      @(negedge clk);
      sample_en = 1'b1;
      sample_in = sample_t'($rtoi(8191.0 * $cos(2.0 * PI * (F0 * t + 0.5 * K * t * t))));
    end
    @(negedge clk) sample_en = 1'b0;
    repeat (5) @(negedge clk);

    peak_t = real'(peak_idx) / FS;
    ratio  = real'(peak) / real'(RESP_MAX);
    $display("chirp: peak %0d (%f of RESP_MAX) at %f s; %0d responses with all LEDs lit",
             peak, ratio, peak_t, n_led8);
    check(n_out == N, "one response per sample");
    check(peak_t > 5.3 && peak_t < 5.8, "peak where the chirp passes 6 kHz");
    check(ratio > 0.90 && ratio < 1.01, "peak near the full-scale response");
    check(bad_far == 0, $sformatf("%0d responses above RESP_MAX/16 away from 6 kHz", bad_far));
    check(n_led8 > 0 && bad_led8 == 0, "all eight LEDs only near 6 kHz");
    check(bad_bar == 0, $sformatf("%0d LED patterns differ from the expected bar", bad_bar));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
