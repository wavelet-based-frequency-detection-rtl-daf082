// preamp_adc_model: behavioural model (not synthesizable) of the board's
// inverting programmable-gain pre-amplifier and two-channel 14-bit SPI ADC,
// as seen from their SPI pins.
//
// Pre-amplifier: while amp_cs_n is low it shifts MOSI in on each rising SCK
// edge; when amp_cs_n rises it takes the last 8 bits as the gain word, channel
// B gain code in bits 7:4 and channel A in bits 3:0.  Gain codes 0..7 mean
// gains 0, -1, -2, -5, -10, -20, -50, -100.  It counts the SCK edges of each
// command and whether SCK was low when chip select was released.
//
// ADC: on each rising edge of ad_conv it converts both channels,
//     code = clip(floor(-gain * (vin - 1.65 V) / 1.25 V * 8192), -8192, 8191)
// and loads the codes of the previous conversion into a 34-bit frame
// (2 zero bits, A, 2 zero bits, B, 2 zero bits).  While the amplifier is not
// selected it drives the next frame bit, MSB first, on MISO after each rising
// SCK edge.  Input voltages are given in microvolts.
module preamp_adc_model (
  input  logic spi_sck,
  input  logic spi_mosi,
  output logic spi_miso,
  input  logic amp_cs_n,
  input  logic amp_shdn,
  input  logic ad_conv,
  input  int   vin_a_uv,
  input  int   vin_b_uv,
  output logic [7:0] gain_word,
  output int   gain_cmds,        // completed gain commands
  output int   last_cmd_bits,    // SCK edges in the last command
  output logic last_cmd_sck_low, // SCK was low when chip select rose
  output int   conversions,
  output int   frame_bits,       // bits driven since the last ad_conv
  output int   last_code_a,      // codes of the most recent conversion
  output int   last_code_b
);

  logic [7:0]  amp_sr = '0;
  int          amp_bits = 0;
  logic [33:0] frame = '0;
  int          held_a = 0, held_b = 0;

  initial begin
    gain_word        = 8'h00;
    gain_cmds        = 0;
    last_cmd_bits    = 0;
    last_cmd_sck_low = 1'b0;
    conversions      = 0;
    frame_bits       = 0;
    last_code_a      = 0;
    last_code_b      = 0;
    spi_miso         = 1'b0;
  end

  function automatic int gain_of(input logic [3:0] code);
    case (code[2:0])
      3'd0: return 0;
      3'd1: return 1;
      3'd2: return 2;
      3'd3: return 5;
      3'd4: return 10;
      3'd5: return 20;
      3'd6: return 50;
      default: return 100;
    endcase
  endfunction

  function automatic int convert(input int vin_uv, input int gain);
    real v;
    int  c;
    v = -real'(gain) * (real'(vin_uv) - 1.65e6) / 1.25e6 * 8192.0;
    if (v >= 8191.0) c = 8191;
    else if (v <= -8192.0) c = -8192;
    else c = int'($floor(v));
    return c;
  endfunction

  always @(posedge spi_sck) begin
    if (!amp_cs_n && !amp_shdn) begin
      amp_sr   <= {amp_sr[6:0], spi_mosi};
      amp_bits <= amp_bits + 1;
    end else if (amp_cs_n) begin
      spi_miso   <= frame[33];
      frame      <= {frame[32:0], 1'b0};
      frame_bits <= frame_bits + 1;
    end
  end

  always @(negedge amp_cs_n) amp_bits <= 0;

  always @(posedge amp_cs_n) begin
    gain_word        <= amp_sr;
    gain_cmds        <= gain_cmds + 1;
    last_cmd_bits    <= amp_bits;
    last_cmd_sck_low <= !spi_sck;
  end

  always @(posedge ad_conv) begin
    logic [13:0] a14, b14;
    a14 = 14'(held_a);
    b14 = 14'(held_b);
    frame       <= {2'b00, a14, 2'b00, b14, 2'b00};
    frame_bits  <= 0;
    held_a      <= convert(vin_a_uv, gain_of(gain_word[3:0]));
    held_b      <= convert(vin_b_uv, gain_of(gain_word[7:4]));
    last_code_a <= convert(vin_a_uv, gain_of(gain_word[3:0]));
    last_code_b <= convert(vin_b_uv, gain_of(gain_word[7:4]));
    conversions <= conversions + 1;
  end

endmodule
