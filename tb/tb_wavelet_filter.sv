// tb_wavelet_filter: self-checking test of the 133-tap complex wavelet filter.
//
// The testbench keeps its own history of the samples it sent and computes the
// expected real part, imaginary part and magnitude-squared in 64-bit integer
// arithmetic from the coefficient tables.  It checks every response, and that
// resp_valid comes exactly two cycles after each sample_en, with random
// samples (full range, including -8192) sent back to back and with gaps.
// It then checks selectivity: a full-scale 6 kHz cosine (20 ksps) must reach
// at least 95% of the full-scale response RESP_MAX, a 5.8 kHz one between 30%
// and 70% of it, and 5 kHz and 7 kHz ones less than RESP_MAX/16.
module tb_wavelet_filter;

  import wavelet_pkg::*;

  localparam real PI = 3.14159265358979;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    sample_en = 1'b0;
  sample_t sample_in = '0;
  part_t   re, im;
  resp_t   resp;
  logic    resp_valid;
  int      checks = 0, failures = 0;

  longint  hist [NUM_TAPS];      // hist[0] = newest sample
  longint  exp_re_q[$], exp_im_q[$];
  longint  en_cycle_q[$];
  longint  cyc = 0;
  longint  max_resp;
  int      n_valid = 0;

  wavelet_filter dut (.clk, .rst, .sample_en, .sample_in, .re, .im, .resp, .resp_valid);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Reference model, updated on the edge that accepts a sample.
  always @(posedge clk) begin
    cyc++;
    if (!rst && sample_en) begin
      longint r, i;
      for (int k = NUM_TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = longint'(sample_in);
      r = 0;
      i = 0;
      for (int k = 0; k < NUM_TAPS; k++) begin
        r += hist[k] * longint'(COEF_RE[k]);
        i += hist[k] * longint'(COEF_IM[k]);
      end
      exp_re_q.push_back(r);
      exp_im_q.push_back(i);
      en_cycle_q.push_back(cyc);
    end
    if (!rst && resp_valid) begin
      longint r, i, c;
      n_valid++;
      if (exp_re_q.size() == 0) begin
        check(1'b0, "resp_valid without a sample");
      end else begin
        r = exp_re_q.pop_front();
        i = exp_im_q.pop_front();
        c = en_cycle_q.pop_front();
        // resp_valid rises after edge c+2, so this block sees it at edge c+3
        check(cyc - c == 3, $sformatf("latency %0d edges, expected 2", cyc - c - 1));
        check(longint'(re) == r && longint'(im) == i,
              $sformatf("re/im %0d/%0d, expected %0d/%0d", re, im, r, i));
        check(longint'(resp) == r * r + i * i,
              $sformatf("resp %0d, expected %0d", resp, r * r + i * i));
        if (longint'(resp) > max_resp) max_resp = longint'(resp);
      end
    end
  end

  task automatic send(input int s);
    @(negedge clk);
    sample_en = 1'b1;
    sample_in = sample_t'(s);
    @(negedge clk);
    sample_en = 1'b0;
  endtask

  task automatic send_b2b(input int s);
    @(negedge clk);
    sample_en = 1'b1;
    sample_in = sample_t'(s);
  endtask

  // Play n samples of a full-scale cosine of frequency f (Hz) at 20 ksps and
  // return the largest response after the filter has filled.
  task automatic tone(input real f, input int n, output longint peak);
    for (int k = 0; k < n; k++) begin
      if (k == NUM_TAPS + 4) max_resp = 0;
      send_b2b(int'($rtoi(8191.0 * $cos(2.0 * PI * f * k / 20000.0 + 0.3))));
    end
    @(negedge clk) sample_en = 1'b0;
    repeat (4) @(negedge clk);
    peak = max_resp;
  endtask

  initial begin
    longint peak;
    real    ratio;
    for (int k = 0; k < NUM_TAPS; k++) hist[k] = 0;
    max_resp = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // Random samples, with gaps.
    for (int k = 0; k < 300; k++) begin
      send(int'($urandom_range(0, 16383)) - 8192);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // Extreme values, back to back.
    for (int k = 0; k < 300; k++) send_b2b((k % 3 == 0) ? -8192 : ((k % 3 == 1) ? 8191 : -8192));
    @(negedge clk) sample_en = 1'b0;
    repeat (4) @(negedge clk);

    tone(6000.0, 600, peak);
    ratio = real'(peak) / real'(RESP_MAX);
    $display("6.0 kHz: peak %0d (%f of RESP_MAX)", peak, ratio);
    check(ratio >= 0.95 && ratio <= 1.001, "6 kHz reaches the full-scale response");
    tone(5800.0, 600, peak);
    ratio = real'(peak) / real'(RESP_MAX);
    $display("5.8 kHz: %f of RESP_MAX", ratio);
    check(ratio > 0.3 && ratio < 0.7, "5.8 kHz gives about half the response");
    tone(5000.0, 600, peak);
    ratio = real'(peak) / real'(RESP_MAX);
    $display("5.0 kHz: %f of RESP_MAX", ratio);
    check(ratio < 1.0 / 16.0, "5 kHz is rejected");
    tone(7000.0, 600, peak);
    ratio = real'(peak) / real'(RESP_MAX);
    $display("7.0 kHz: %f of RESP_MAX", ratio);
    check(ratio < 1.0 / 16.0, "7 kHz is rejected");

    check(exp_re_q.size() == 0, "every sample produced a response");
    check(n_valid == 300 + 300 + 4 * 600, "response count");
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
