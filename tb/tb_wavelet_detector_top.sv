// tb_wavelet_detector_top: end-to-end test of the whole detector at its
// default parameters (10 MHz clock, 20 ksps, 10 ms debounce sampling, 133-tap
// wavelet), with a behavioural model of the amplifier and ADC on the SPI pins.
//
// Sequence: power-up (the gain must be programmed without a button press);
// BTN 1 pressed and released with contact bounce (the system must reset and
// program the gain again); BTN 2 pressed with bounce (sampling must start at
// 20 kHz); then sinusoids of 1.25 V amplitude around 1.65 V at frequencies
// across and beyond the wavelet's pass band, 260 samples each.
//
// Checks, all independent of the RTL's internals except where it is probed:
//  * gain word 0x01 received, 8 bits, SCK low at chip-select release;
//  * ADCON period of exactly 500 cycles; 34 SCK per frame;
//  * every sample entering the wavelet equals the ADC code the model converted
//    two sample periods earlier (the ADC's own one-read pipeline plus the
//    shift of the last completed read on the next pulse);
//  * every response equals a 64-bit reference correlation of those samples;
//  * the LEDs equal the bar expected from that response, one cycle later;
//  * 6 kHz lights all eight LEDs, 5.5 kHz and 6.6 kHz none, and the count
//    falls off on both sides of 6 kHz.
// Each mechanism (power-on programming, button reset with re-programming,
// bounce filtering, run start, sampling, LED levels 0 and 8) is counted, and
// one that never happens counts as a failure.
module tb_wavelet_detector_top;

  import wavelet_pkg::*;

  localparam real PI = 3.14159265358979;

  logic clk = 1'b0;
  logic btn1 = 1'b0, btn2 = 1'b0;
  logic spi_sck, spi_mosi, spi_miso, amp_cs_n, amp_shdn, ad_conv;
  logic [7:0] led;
  int   vin_a_uv = 1_650_000, vin_b_uv = 1_650_000;
  logic [7:0] gain_word;
  int   gain_cmds, last_cmd_bits, conversions, frame_bits, last_code_a, last_code_b;
  logic last_cmd_sck_low;

  int     checks = 0, failures = 0;
  longint cyc = 0;

  wavelet_detector_top dut (
    .clk, .btn1, .btn2, .spi_sck, .spi_mosi, .spi_miso, .amp_cs_n, .amp_shdn, .ad_conv, .led
  );

  preamp_adc_model model (
    .spi_sck, .spi_mosi, .spi_miso, .amp_cs_n, .amp_shdn, .ad_conv,
    .vin_a_uv, .vin_b_uv, .gain_word, .gain_cmds, .last_cmd_bits, .last_cmd_sck_low,
    .conversions, .frame_bits, .last_code_a, .last_code_b
  );

  always #50 clk = ~clk;   // 10 MHz

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_rst_edges = 0, n_db1_edges = 0, n_db2_edges = 0;
  int n_adconv = 0, n_bad_period = 0, n_bad_frame = 0;
  int n_resp = 0, n_led0 = 0, n_led8 = 0, n_ledmid = 0;
  logic rst_d = 1'b0, db1_d = 1'b0, db2_d = 1'b0, adconv_d = 1'b0;
  longint last_adconv = -1;
  logic run_tracking = 1'b0;

  // ---------------- reference path ----------------
  int     codes[$];                 // ADC codes converted since tracking began
  int     accepted[$];              // samples shifted into the wavelet
  longint hist [NUM_TAPS];
  longint exp_re_q[$], exp_im_q[$];
  logic   led_check_pending = 1'b0;
  logic [7:0] led_expected;
  int     conv_seen = 0;
  int     peak_leds = 0;

  function automatic logic [7:0] bar_of(input longint r);
    logic [7:0] e;
    longint m;
    m = longint'(RESP_MAX);
    for (int k = 1; k <= 8; k++) e[k-1] = ((r >>> 32) > ((k * m / 8 - m / 16) >>> 32));
    return e;
  endfunction

  always @(posedge clk) begin
    cyc++;
    rst_d    <= dut.rst;
    db1_d    <= dut.btn1_db;
    db2_d    <= dut.btn2_db;
    adconv_d <= ad_conv;
    if (dut.rst && !rst_d) n_rst_edges++;
    if (dut.btn1_db != db1_d) n_db1_edges++;
    if (dut.btn2_db != db2_d) n_db2_edges++;

    if (led_check_pending) begin
      check(led == led_expected, $sformatf("LEDs %b, expected %b", led, led_expected));
      led_check_pending <= 1'b0;
    end

    if (run_tracking) begin
      // ADCON period
      if (ad_conv && !adconv_d) begin
        if (last_adconv >= 0) begin
          if (cyc - last_adconv != 500) n_bad_period++;
        end
        last_adconv = cyc;
        n_adconv++;
      end
      if (dut.u_adc.sample_valid && frame_bits != 34) n_bad_frame++;
      if (conversions != conv_seen) begin
        codes.push_back(last_code_a);
        conv_seen = conversions;
      end
      // sample entering the wavelet (values before this edge's update)
      if (dut.u_wavelet.sample_en) begin
        longint r, i;
        int j;
        j = accepted.size();
        accepted.push_back(int'(dut.u_wavelet.sample_in));
        if (j >= 2) check(j - 2 < codes.size() && accepted[j] == codes[j-2],
                          $sformatf("wavelet input %0d is %0d, expected ADC code %0d",
                                    j, accepted[j], (j - 2 < codes.size()) ? codes[j-2] : 99999));
        for (int k = NUM_TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = longint'(dut.u_wavelet.sample_in);
        r = 0;
        i = 0;
        for (int k = 0; k < NUM_TAPS; k++) begin
          r += hist[k] * longint'(COEF_RE[k]);
          i += hist[k] * longint'(COEF_IM[k]);
        end
        exp_re_q.push_back(r);
        exp_im_q.push_back(i);
      end
      if (dut.u_wavelet.resp_valid && exp_re_q.size() > 0) begin
        longint r, i, e;
        int cnt;
        r = exp_re_q.pop_front();
        i = exp_im_q.pop_front();
        e = r * r + i * i;
        n_resp++;
        check(longint'(dut.u_wavelet.resp) == e,
              $sformatf("response %0d, expected %0d", dut.u_wavelet.resp, e));
        led_expected      <= bar_of(e);
        led_check_pending <= 1'b1;
        cnt = $countones(bar_of(e));
        if (cnt > peak_leds) peak_leds = cnt;
        if (cnt == 0) n_led0++;
        else if (cnt == 8) n_led8++;
        else n_ledmid++;
      end
    end
  end

  // Tone source: 1.65 V + 1.25 V * cos(2*pi*f*t), t from the 100 ns clock.
  real tone_hz = 0.0;
  longint tone_t0 = 0;
  always @(negedge clk) begin
    if (tone_hz > 0.0)
      vin_a_uv = 1_650_000 + int'($rtoi(1_250_000.0 *
                 $cos(2.0 * PI * tone_hz * real'(cyc - tone_t0) * 100.0e-9)));
    else
      vin_a_uv = 1_650_000;
  end

  task automatic press(ref logic btn, input logic level);
    for (int i = 0; i < 40; i++) begin
      @(negedge clk) btn = logic'($urandom_range(0, 1));
    end
    @(negedge clk) btn = level;
  endtask

  task automatic play(input real f, output int leds_peak);
    peak_leds = 0;
    tone_hz   = f;
    tone_t0   = cyc;
    // 140 samples to fill the 133 taps, then 120 samples to watch
    repeat (140 * 500) @(posedge clk);
    peak_leds = 0;
    repeat (120 * 500) @(posedge clk);
    leds_peak = peak_leds;
    $display("tone %7.1f Hz: peak LED count %0d", f, leds_peak);
  endtask

  initial begin
    int p;
    int peaks [7];
    real freqs [7] = '{5500.0, 5800.0, 5900.0, 6000.0, 6100.0, 6200.0, 6600.0};

    for (int k = 0; k < NUM_TAPS; k++) hist[k] = 0;

    // Power-up: gain is programmed without any button.
    repeat (200) @(posedge clk);
    #1;
    check(gain_cmds == 1, $sformatf("gain programmed at power-up (%0d commands)", gain_cmds));
    check(gain_word == 8'h01 && last_cmd_bits == 8 && last_cmd_sck_low,
          "gain command 0x01, 8 bits, SCK low at release");
    check(!dut.u_pg.pulse && !ad_conv && led == 8'h00, "idle and dark before BTN 2");

    // BTN 1: reset, and the gain is programmed again after release.
    press(btn1, 1'b1);
    repeat (300_000) @(posedge clk);
    check(dut.rst == 1'b1, "BTN 1 holds the system in reset");
    press(btn1, 1'b0);
    repeat (300_000) @(posedge clk);
    #1;
    check(dut.rst == 1'b0, "reset released after BTN 1");
    check(gain_cmds == 2, $sformatf("gain programmed again after reset (%0d)", gain_cmds));
    check(n_db1_edges == 2, $sformatf("BTN 1 debounced to 2 edges (saw %0d)", n_db1_edges));
    check(conversions == 0, "no sampling before BTN 2");

    // BTN 2: start sampling; it keeps running after release.
    run_tracking = 1'b1;
    conv_seen = conversions;
    press(btn2, 1'b1);
    repeat (300_000) @(posedge clk);
    press(btn2, 1'b0);
    check(n_db2_edges == 1, $sformatf("BTN 2 debounced to one edge so far (saw %0d)", n_db2_edges));
    check(n_adconv > 100, "sampling started");

    for (int f = 0; f < 7; f++) begin
      play(freqs[f], p);
      peaks[f] = p;
    end
    check(peaks[3] == 8, "6 kHz lights all eight LEDs");
    check(peaks[0] == 0, "5.5 kHz lights none");
    check(peaks[6] == 0, "6.6 kHz lights none");
    check(peaks[1] > 0 && peaks[1] < peaks[2] && peaks[2] <= peaks[3], "count rises toward 6 kHz");
    check(peaks[5] > 0 && peaks[5] < peaks[4] && peaks[4] <= peaks[3], "count falls after 6 kHz");

    check(n_bad_period == 0, $sformatf("%0d ADCON periods differ from 500 cycles", n_bad_period));
    check(n_bad_frame == 0, $sformatf("%0d frames without 34 SCK cycles", n_bad_frame));
    check(gain_cmds == 2, "no further gain commands while running");

    $display("mechanisms: resets %0d, BTN1 edges %0d, BTN2 edges %0d, ADCON %0d, responses %0d, LED0 %0d, LED1-7 %0d, LED8 %0d",
             n_rst_edges, n_db1_edges, n_db2_edges, n_adconv, n_resp, n_led0, n_ledmid, n_led8);
    check(n_rst_edges >= 2, "power-on and button resets happened");
    check(n_adconv > 0 && n_resp > 0, "samples and responses happened");
    check(n_led0 > 0 && n_ledmid > 0 && n_led8 > 0, "LED levels 0, 1-7 and 8 all happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
