// debouncer: removes contact bounce from a push button.
//
// Two flip-flops in series sample the raw button once every SAMPLE_TICKS clock
// cycles.  The clean output takes the value of the two samples only when they
// agree, so a level must be seen on two successive sample ticks (between one
// and two tick periods) before the output follows it; bounces shorter than a
// tick period never reach the output.  No one-shot is produced: the output is
// a level that stays high while the button is held.
//
// The two-flip-flop structure is the one the design describes; the sample
// period (10 ms at the 10 MHz design clock) and the agree-before-change rule are
// this implementation's choice.  The flip-flops start at zero on configuration
// (declaration initial values), since the button this block cleans is the only
// reset source on the board.
//
// Interface: clk, btn_in (raw, asynchronous), btn_out (clean level).
module debouncer #(
  parameter int unsigned SAMPLE_TICKS = 100_000
) (
  input  logic clk,
  input  logic btn_in,
  output logic btn_out
);

  localparam int unsigned CNT_W = (SAMPLE_TICKS > 1) ? $clog2(SAMPLE_TICKS) : 1;

  logic [CNT_W-1:0] tick_cnt = '0;
  logic             tick;
  logic             ff1 = 1'b0;
  logic             ff2 = 1'b0;
  logic             out_q = 1'b0;

  assign tick = (tick_cnt == CNT_W'(SAMPLE_TICKS - 1));

  always_ff @(posedge clk) begin
    tick_cnt <= tick ? '0 : tick_cnt + 1'b1;
    if (tick) begin
      ff1 <= btn_in;
      ff2 <= ff1;
    end
    if (ff1 == ff2) out_q <= ff2;
  end

  assign btn_out = out_q;

endmodule
