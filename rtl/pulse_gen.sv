// pulse_gen: counter-based sample-rate pulse generator.
//
// A two-state FSM.  After reset it waits in IDLE for `do_run`; once `do_run`
// is seen it moves to RUN and stays there until the next reset.  In RUN a
// counter steps through PERIOD clock cycles and raises `pulse` for one cycle at
// the end of each pass, then starts again from zero.  With the 10 MHz design
// clock and PERIOD = 500 the pulse comes every 50 us, i.e. 20 kHz, the ADC
// sample rate; each pulse starts one ADC read and shifts one sample into the
// wavelet filter.
//
// The two states, the 500-count period and the one-cycle pulse follow the
// original design; staying in RUN until reset (do_run need not be held) is
// this implementation's choice.
//
// Timing: the first pulse comes PERIOD cycles after the cycle in which do_run
// is sampled high; then one every PERIOD cycles.
module pulse_gen #(
  parameter int unsigned PERIOD = 500
) (
  input  logic clk,
  input  logic rst,
  input  logic do_run,
  output logic pulse
);

  typedef enum logic {IDLE, RUN} state_t;

  localparam int unsigned CNT_W = $clog2(PERIOD);

  state_t           state;
  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      cnt   <= '0;
      pulse <= 1'b0;
    end else begin
      pulse <= 1'b0;
      case (state)
        IDLE: begin
          cnt <= '0;
          if (do_run) state <= RUN;
        end
        RUN: begin
          if (cnt == CNT_W'(PERIOD - 1)) begin
            cnt   <= '0;
            pulse <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (rst) pulse |=> !pulse);

endmodule
