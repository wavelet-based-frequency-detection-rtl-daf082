// led_ctrl: bar-graph display of the wavelet response on eight LEDs.
//
// The full-scale response RESP_MAX (magnitude-squared for a full-scale input
// at the wavelet frequency) is cut into eight equal parts; threshold k sits in
// the middle of the k-th part, k*RESP_MAX/8 - RESP_MAX/16.  LED k-1 is lit while
// the response is above threshold k, so more LEDs light the closer the input
// is to the wavelet frequency and the stronger it is.
//
// Only response bits [RESP_W-1:CMP_LSB] (49..32) and the same bits of each
// threshold take part in the comparison: an 18-bit compare instead of a 50-bit
// one.  The thresholds' dropped bits carry less than 1/6000 of RESP_MAX, so the
// display is unchanged for practical purposes.  The thresholds, the eight
// levels and the 49..32 slice follow the original design.  Its description also
// says 34 bits were removed from the thresholds; this implementation drops 32
// from both sides so that the two slices have the same weight.  The response is
// never negative, so the slices are compared as unsigned numbers.
//
// Timing: `led` is registered and changes one cycle after `resp_valid`.
module led_ctrl #(
  parameter wavelet_pkg::resp_t RESP_MAX = wavelet_pkg::RESP_MAX
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  wavelet_pkg::resp_t                    resp,
  input  logic                                  resp_valid,
  output logic [wavelet_pkg::NUM_LEDS-1:0]      led
);

  import wavelet_pkg::*;

  localparam int unsigned CMP_W = RESP_W - CMP_LSB;

  typedef logic [CMP_W-1:0] cmp_t;

  function automatic cmp_t thr_slice(input int unsigned k);
    resp_t t;
    longint m;
    m = longint'(RESP_MAX);
    t = resp_t'((longint'(k) * m) / longint'(NUM_LEDS) - m / longint'(2 * NUM_LEDS));
    return t[RESP_W-1:CMP_LSB];
  endfunction

  cmp_t resp_hi;
  assign resp_hi = resp[RESP_W-1:CMP_LSB];

  always_ff @(posedge clk) begin
    if (rst) begin
      led <= '0;
    end else if (resp_valid) begin
      for (int k = 1; k <= NUM_LEDS; k++) led[k-1] <= (resp_hi > thr_slice(k));
    end
  end

endmodule
