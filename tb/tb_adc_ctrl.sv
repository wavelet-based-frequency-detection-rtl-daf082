// tb_adc_ctrl: self-checking test of the pre-amplifier / ADC SPI controller
// against a behavioural model of the two devices.
//
// Checks: the gain command reaches the amplifier as 8 bits with value 0x01,
// SCK is low when the amplifier chip select is released, and gain_set rises;
// each read gives 34 SCK cycles and delivers, 70 cycles after start_read, the
// channel A and B codes the model converted at the previous read (the ADC
// pipeline); DC inputs of 2.9 V and 0.4 V read as 0x2000 and 0x1FFF; a read
// requested while the gain command is still being sent is served after it.
module tb_adc_ctrl;

  import wavelet_pkg::*;

  logic    clk = 1'b0;
  logic    rst = 1'b1;
  logic    prog_gain = 1'b0, start_read = 1'b0;
  logic    spi_sck, spi_mosi, spi_miso, amp_cs_n, amp_shdn, ad_conv;
  sample_t sample_a, sample_b;
  logic    sample_valid, gain_set, busy;
  int      vin_a_uv = 1_650_000, vin_b_uv = 1_650_000;
  logic [7:0] gain_word;
  int      gain_cmds, last_cmd_bits, conversions, frame_bits, last_code_a, last_code_b;
  logic    last_cmd_sck_low;
  int      checks = 0, failures = 0;
  longint  cyc = 0;
  int      sck_rises = 0;
  logic    sck_d = 1'b0;

  adc_ctrl dut (
    .clk, .rst, .prog_gain, .start_read,
    .spi_sck, .spi_mosi, .spi_miso, .amp_cs_n, .amp_shdn, .ad_conv,
    .sample_a, .sample_b, .sample_valid, .gain_set, .busy
  );

  preamp_adc_model model (
    .spi_sck, .spi_mosi, .spi_miso, .amp_cs_n, .amp_shdn, .ad_conv,
    .vin_a_uv, .vin_b_uv, .gain_word, .gain_cmds, .last_cmd_bits, .last_cmd_sck_low,
    .conversions, .frame_bits, .last_code_a, .last_code_b
  );

  always #50 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    sck_d <= spi_sck;
    if (spi_sck && !sck_d) sck_rises++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Start one read and return what the controller delivered and when.
  task automatic do_read(output int a, output int b, output longint lat, output int sck_n);
    longint t0;
    int s0;
    @(negedge clk) start_read = 1'b1;
    @(posedge clk);
    #1 t0 = cyc;
    s0 = sck_rises;
    start_read = 1'b0;
    while (!sample_valid) begin
      @(posedge clk); #1;
      if (cyc - t0 > 400) break;
    end
    lat = cyc - t0;
    a = int'(sample_a);
    b = int'(sample_b);
    sck_n = sck_rises - s0;
  endtask

  initial begin
    int a, b, sck_n, exp_a, exp_b;
    longint lat;

    repeat (4) @(posedge clk);
    #1 rst = 1'b0;
    check(!gain_set && amp_cs_n && !spi_sck, "idle after reset");

    // Gain programming, with a read requested while it is in progress.
    @(negedge clk) prog_gain = 1'b1;
    @(negedge clk) prog_gain = 1'b0;
    repeat (3) @(negedge clk);
    start_read = 1'b1;
    @(negedge clk) start_read = 1'b0;
    repeat (200) @(posedge clk);
    #1;
    check(gain_cmds == 1, "one gain command sent");
    check(gain_word == 8'h01, $sformatf("gain word 0x%02h, expected 0x01", gain_word));
    check(last_cmd_bits == 8, $sformatf("gain command of %0d bits, expected 8", last_cmd_bits));
    check(last_cmd_sck_low, "SCK low when amplifier chip select released");
    check(gain_set, "gain_set after programming");
    check(conversions == 1, "read held during programming was served");
    check(!busy && !spi_sck && amp_cs_n, "idle after the transfers");

    // Reads with random inputs: each delivers the previous conversion.
    exp_a = last_code_a;
    exp_b = last_code_b;
    for (int i = 0; i < 40; i++) begin
      vin_a_uv = $urandom_range(300_000, 3_000_000);
      vin_b_uv = $urandom_range(300_000, 3_000_000);
      do_read(a, b, lat, sck_n);
      check(a == exp_a, $sformatf("read %0d channel A %0d, expected %0d", i, a, exp_a));
      check(b == exp_b, $sformatf("read %0d channel B %0d, expected %0d", i, b, exp_b));
      check(lat == 70, $sformatf("read latency %0d cycles, expected 70", lat));
      check(sck_n == 34, $sformatf("%0d SCK cycles per frame, expected 34", sck_n));
      check(frame_bits == 34, "model shifted out 34 bits");
      exp_a = last_code_a;
      exp_b = last_code_b;
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end

    // DC inputs at the ends of the range: two reads each (pipeline).
    vin_a_uv = 2_900_000;
    do_read(a, b, lat, sck_n);
    do_read(a, b, lat, sck_n);
    check(sample_a == 14'h2000, $sformatf("2.9 V reads 0x%04h, expected 0x2000", sample_a));
    vin_a_uv = 400_000;
    do_read(a, b, lat, sck_n);
    do_read(a, b, lat, sck_n);
    check(sample_a == 14'h1FFF, $sformatf("0.4 V reads 0x%04h, expected 0x1FFF", sample_a));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
