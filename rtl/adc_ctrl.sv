// adc_ctrl: SPI master for the board's programmable-gain pre-amplifier and
// two-channel 14-bit ADC.
//
// Two jobs share one SPI clock (SCK) that runs at half the design clock
// (5 MHz from 10 MHz) and is held low between transfers:
//
//  * Gain programming.  On `prog_gain` (the delayed pulse after reset) the
//    controller pulls AMP_CS low, sends the 8-bit GAIN_CMD MSB first on MOSI
//    (MOSI changes while SCK is low, the amplifier samples on the rising edge),
//    then returns SCK to zero and only then releases AMP_CS.  `gain_set` goes
//    high and stays high until reset.
//
//  * Sample read.  On `start_read` (the 20 kHz pulse) it raises ADCON for one
//    cycle and then gives 34 SCK cycles.  The ADC answers with a 34-bit frame:
//    2 idle bits, 14 bits of channel A, 2 idle bits, 14 bits of channel B and
//    2 idle bits, MSB first, two's complement.  MISO is shifted into the least
//    significant bit of a 34-bit shift register on each falling SCK edge, so no
//    bit counter selects bit positions.  The ADC converts on ADCON and sends the
//    result of the previous conversion, so each frame carries the sample taken
//    one read earlier.  At the end of the frame `sample_a`, `sample_b` are
//    loaded and `sample_valid` pulses for one cycle.
//
// What follows the original design: the 34-bit frame layout, the gain
// command 0x01 (gain -1 on channel A), the automatic triggers, SCK at half the
// clock rate, shifting on the falling SCK edge and forcing SCK back to zero
// after gain programming.  This implementation's own choices: the state
// encoding, one cycle of ADCON, a request that arrives while a transfer is in
// progress being held and served afterwards, and AMP_SHDN driven low (amplifier
// enabled).
//
// Timing: sample_valid is high 2*FRAME_BITS + 2 cycles after the clock edge
// that samples start_read (70 cycles at 10 MHz, well inside the 500-cycle
// sample period); gain programming occupies 2*8 + 2 cycles.
module adc_ctrl #(
  parameter logic [7:0]  GAIN_CMD   = 8'h01,
  parameter int unsigned FRAME_BITS = 34
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      prog_gain,
  input  logic                      start_read,
  // SPI and control pins
  output logic                      spi_sck,
  output logic                      spi_mosi,
  input  logic                      spi_miso,
  output logic                      amp_cs_n,
  output logic                      amp_shdn,
  output logic                      ad_conv,
  // results
  output wavelet_pkg::sample_t      sample_a,
  output wavelet_pkg::sample_t      sample_b,
  output logic                      sample_valid,
  output logic                      gain_set,
  output logic                      busy
);

  import wavelet_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_AMP_TX, S_AMP_END, S_CONV, S_READ, S_READ_END} state_t;

  localparam int unsigned BIT_W = $clog2(FRAME_BITS);
  // Bit positions of the two channels in the shift register after a frame.
  localparam int unsigned A_MSB = FRAME_BITS - 3;
  localparam int unsigned B_MSB = FRAME_BITS - 3 - SAMPLE_W - 2;

  state_t                  state;
  logic                    phase;        // 0: SCK low half, 1: SCK high half
  logic [BIT_W-1:0]        bit_cnt;
  logic [FRAME_BITS-1:0]   shreg;
  logic                    gain_pending;
  logic                    read_pending;

  assign amp_shdn = 1'b0;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state        <= S_IDLE;
      phase        <= 1'b0;
      bit_cnt      <= '0;
      shreg        <= '0;
      spi_sck      <= 1'b0;
      spi_mosi     <= 1'b0;
      amp_cs_n     <= 1'b1;
      ad_conv      <= 1'b0;
      sample_a     <= '0;
      sample_b     <= '0;
      sample_valid <= 1'b0;
      gain_set     <= 1'b0;
      gain_pending <= 1'b0;
      read_pending <= 1'b0;
    end else begin
      sample_valid <= 1'b0;
      if (prog_gain)  gain_pending <= 1'b1;
      if (start_read) read_pending <= 1'b1;

      case (state)
        S_IDLE: begin
          spi_sck <= 1'b0;
          phase   <= 1'b0;
          bit_cnt <= '0;
          if (prog_gain || gain_pending) begin
            gain_pending <= 1'b0;
            amp_cs_n     <= 1'b0;
            spi_mosi     <= GAIN_CMD[7];
            state        <= S_AMP_TX;
          end else if (start_read || read_pending) begin
            read_pending <= 1'b0;
            ad_conv      <= 1'b1;
            state        <= S_CONV;
          end
        end

        S_AMP_TX: begin
          if (!phase) begin
            spi_sck <= 1'b1;
            phase   <= 1'b1;
          end else begin
            spi_sck <= 1'b0;
            phase   <= 1'b0;
            if (bit_cnt == BIT_W'(7)) begin
              state <= S_AMP_END;
            end else begin
              bit_cnt  <= bit_cnt + 1'b1;
              spi_mosi <= GAIN_CMD[3'(6 - bit_cnt)];
            end
          end
        end

        S_AMP_END: begin
          // SCK is already low here; release chip select only after it.
          spi_sck  <= 1'b0;
          spi_mosi <= 1'b0;
          amp_cs_n <= 1'b1;
          gain_set <= 1'b1;
          state    <= S_IDLE;
        end

        S_CONV: begin
          ad_conv <= 1'b0;
          state   <= S_READ;
        end

        S_READ: begin
          if (!phase) begin
            spi_sck <= 1'b1;
            phase   <= 1'b1;
          end else begin
            // Falling SCK edge: take the bit the ADC has been holding.
            spi_sck <= 1'b0;
            phase   <= 1'b0;
            shreg   <= {shreg[FRAME_BITS-2:0], spi_miso};
            if (bit_cnt == BIT_W'(FRAME_BITS - 1)) state <= S_READ_END;
            else bit_cnt <= bit_cnt + 1'b1;
          end
        end

        S_READ_END: begin
          sample_a     <= sample_t'(shreg[A_MSB -: SAMPLE_W]);
          sample_b     <= sample_t'(shreg[B_MSB -: SAMPLE_W]);
          sample_valid <= 1'b1;
          state        <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Chip select of the amplifier is never low while ADCON is high.
  assert property (@(posedge clk) disable iff (rst) !(ad_conv && !amp_cs_n));
  // SCK is low whenever no transfer is in progress.
  assert property (@(posedge clk) disable iff (rst) (state == S_IDLE) |-> !spi_sck);

endmodule
