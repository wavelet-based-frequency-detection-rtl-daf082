// delayed_pulse_gen: one pulse a fixed time after reset.
//
// After reset is released the block counts DELAY clock cycles (three 100 ns
// cycles at the 10 MHz design clock), then drives `pulse` high for exactly one
// cycle and sets a `done` flag in the same cycle.  The flag keeps it silent
// until the next reset.  In the detector the pulse tells the ADC controller to
// send the pre-amplifier gain command, so the gain is programmed automatically
// every time the system is reset.
//
// Counting three 100 ns periods, the one-cycle pulse and the done flag follow
// the original design; the synchronous active-high reset is this
// implementation's choice.
//
// Timing: with reset low from cycle 0, pulse is high in cycle DELAY.
module delayed_pulse_gen #(
  parameter int unsigned DELAY = 3
) (
  input  logic clk,
  input  logic rst,
  output logic pulse,
  output logic done
);

  localparam int unsigned CNT_W = $clog2(DELAY + 1);

  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt   <= '0;
      pulse <= 1'b0;
      done  <= 1'b0;
    end else begin
      pulse <= 1'b0;
      if (!done) begin
        if (cnt == CNT_W'(DELAY - 1)) begin
          pulse <= 1'b1;
          done  <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) pulse |=> !pulse);

endmodule
