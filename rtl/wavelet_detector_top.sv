// wavelet_detector_top: 6 kHz tone detector built around a complex Morlet
// wavelet, for a board with a programmable-gain pre-amplifier, a two-channel
// SPI ADC, two push buttons and eight LEDs.
//
// Data path: the 20 kHz pulse generator starts an ADC read every 500 cycles;
// the ADC controller returns the channel A sample; on the next pulse that
// sample is shifted into the 133-tap wavelet filter, whose magnitude-squared
// response drives the LED bar graph.  Control: BTN 1 (debounced) is the system
// reset; after it is released the delayed pulse generator makes the ADC
// controller program the amplifier gain (-1).  BTN 2 (debounced) starts the
// pulse generator, which then runs until the next reset.
//
// The block set and the connections follow the design's module architecture
// diagram: DB on each button, delayed pulse gen to ADC, 20 kHz pulse gen to ADC
// and to the wavelet, ADC to wavelet, wavelet to LED.  The design's clock comes
// from a vendor clock manager that divides the 50 MHz board clock by five;
// that part is outside this RTL, so `clk` is its 10 MHz output.  This
// implementation's own choices: the wavelet shifts in the latest completed
// sample on each pulse (one pulse after the read that produced it, since a
// read takes 70 cycles), and a four-cycle power-on reset built from
// configuration-initialised flip-flops is OR-ed with BTN 1, so the system
// starts in a known state without a button press.
//
// Interface: clk (10 MHz), btn1, btn2 (raw buttons), the SPI and control pins of
// the amplifier and ADC, led[7:0].
module wavelet_detector_top #(
  parameter int unsigned CLK_HZ       = 10_000_000,
  parameter int unsigned SAMPLE_HZ    = 20_000,
  parameter int unsigned DEBOUNCE_HZ  = 100,
  parameter int unsigned GAIN_DELAY   = 3,
  parameter logic [7:0]  GAIN_CMD     = 8'h01
) (
  input  logic       clk,
  input  logic       btn1,
  input  logic       btn2,
  output logic       spi_sck,
  output logic       spi_mosi,
  input  logic       spi_miso,
  output logic       amp_cs_n,
  output logic       amp_shdn,
  output logic       ad_conv,
  output logic [7:0] led
);

  import wavelet_pkg::*;

  localparam int unsigned SAMPLE_PERIOD = CLK_HZ / SAMPLE_HZ;
  localparam int unsigned DB_TICKS      = CLK_HZ / DEBOUNCE_HZ;

  // ---- reset -------------------------------------------------------------
  logic [3:0] por_sr = '0;
  logic       btn1_db, btn2_db;
  logic       rst;

  always_ff @(posedge clk) por_sr <= {por_sr[2:0], 1'b1};

  debouncer #(.SAMPLE_TICKS(DB_TICKS)) u_db1 (.clk, .btn_in(btn1), .btn_out(btn1_db));
  debouncer #(.SAMPLE_TICKS(DB_TICKS)) u_db2 (.clk, .btn_in(btn2), .btn_out(btn2_db));

  always_ff @(posedge clk) rst <= !por_sr[3] || btn1_db;

  // ---- sequencing --------------------------------------------------------
  logic prog_gain, gain_pulse_done;
  logic sample_pulse;

  delayed_pulse_gen #(.DELAY(GAIN_DELAY)) u_dpg (
    .clk, .rst, .pulse(prog_gain), .done(gain_pulse_done)
  );

  pulse_gen #(.PERIOD(SAMPLE_PERIOD)) u_pg (
    .clk, .rst, .do_run(btn2_db), .pulse(sample_pulse)
  );

  // ---- ADC ---------------------------------------------------------------
  sample_t sample_a, sample_b;
  logic    sample_valid, gain_set, adc_busy;

  adc_ctrl #(.GAIN_CMD(GAIN_CMD)) u_adc (
    .clk, .rst,
    .prog_gain, .start_read(sample_pulse),
    .spi_sck, .spi_mosi, .spi_miso, .amp_cs_n, .amp_shdn, .ad_conv,
    .sample_a, .sample_b, .sample_valid, .gain_set, .busy(adc_busy)
  );

  // ---- wavelet and display ------------------------------------------------
  part_t re, im;
  resp_t resp;
  logic  resp_valid;

  wavelet_filter u_wavelet (
    .clk, .rst, .sample_en(sample_pulse), .sample_in(sample_a),
    .re, .im, .resp, .resp_valid
  );

  led_ctrl u_led (
    .clk, .rst, .resp, .resp_valid, .led
  );

endmodule
