// wavelet_filter: complex Morlet correlator with magnitude-squared output.
//
// The filter is a NUM_TAPS-tap FIR with complex coefficients and a real input.
// Each `sample_en` shifts the new 14-bit sample into tap 0 (the least
// significant slot) and moves every older sample up one place.  The whole tap
// array is then multiplied element by element with the real and with the
// imaginary coefficient array, and each set of products is summed:
//     re = sum_i taps[i] * COEF_RE[i],   im = sum_i taps[i] * COEF_IM[i]
// The magnitude-squared response re^2 + im^2 is large only while the recent
// input holds energy near the wavelet frequency (6 kHz at 20 ksps); a square
// root is not taken because only the relative size matters.
//
// Following the original design: 133 taps and coefficients of 14 bits, the
// shift-left tap array, the fully parallel multiply-and-sum of all taps for both
// coefficient sets on every sample, 33-bit signed real and imaginary registers
// and a 50-bit response.  This implementation's own choices: two register
// stages after the shift (the sums, then the response with re/im aligned to
// it), and an elaboration check that the chosen coefficients cannot overflow
// those widths.
//
// Timing: `sample_en` sampled at clock edge k shifts the taps; the sums are
// registered at edge k+1; `re`, `im` and `resp` are loaded together and
// `resp_valid` is high after edge k+2.  A new sample may come every cycle.
module wavelet_filter #(
  parameter int unsigned         NUM_TAPS = wavelet_pkg::NUM_TAPS,
  parameter wavelet_pkg::coef_t  COEF_RE [NUM_TAPS] = wavelet_pkg::COEF_RE,
  parameter wavelet_pkg::coef_t  COEF_IM [NUM_TAPS] = wavelet_pkg::COEF_IM
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 sample_en,
  input  wavelet_pkg::sample_t sample_in,
  output wavelet_pkg::part_t   re,
  output wavelet_pkg::part_t   im,
  output wavelet_pkg::resp_t   resp,
  output logic                 resp_valid
);

  import wavelet_pkg::*;

  // Worst case |re|, |im| for a full-scale input must fit the part registers,
  // and the sum of their squares the response register.
  localparam longint MAX_RE = coef_abs_sum(COEF_RE) * (longint'(1) << (SAMPLE_W - 1));
  localparam longint MAX_IM = coef_abs_sum(COEF_IM) * (longint'(1) << (SAMPLE_W - 1));
  if (MAX_RE >= (longint'(1) << (PART_W - 1)) || MAX_IM >= (longint'(1) << (PART_W - 1))) begin : g_part_overflow
    $error("wavelet_filter: coefficients can overflow the %0d-bit real/imag registers", PART_W);
  end
  if (MAX_RE * MAX_RE + MAX_IM * MAX_IM >= (longint'(1) << (RESP_W - 1))) begin : g_resp_overflow
    $error("wavelet_filter: coefficients can overflow the %0d-bit response", RESP_W);
  end

  sample_t taps [NUM_TAPS];
  part_t   re_sum, im_sum;
  part_t   re_q, im_q;          // stage 1: the two sums
  logic    part_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NUM_TAPS; i++) taps[i] <= '0;
    end else if (sample_en) begin
      taps[0] <= sample_in;
      for (int i = 1; i < NUM_TAPS; i++) taps[i] <= taps[i-1];
    end
  end

  always_comb begin
    re_sum = '0;
    im_sum = '0;
    for (int i = 0; i < NUM_TAPS; i++) begin
      re_sum += part_t'(taps[i]) * part_t'(COEF_RE[i]);
      im_sum += part_t'(taps[i]) * part_t'(COEF_IM[i]);
    end
  end

  // shifted: taps changed at the previous edge; part_valid: re/im hold the sums
  logic shifted;

  always_ff @(posedge clk) begin
    if (rst) begin
      re_q       <= '0;
      im_q       <= '0;
      re         <= '0;
      im         <= '0;
      resp       <= '0;
      shifted    <= 1'b0;
      part_valid <= 1'b0;
      resp_valid <= 1'b0;
    end else begin
      shifted    <= sample_en;
      part_valid <= shifted;
      resp_valid <= part_valid;
      if (shifted) begin
        re_q <= re_sum;
        im_q <= im_sum;
      end
      if (part_valid) begin
        re   <= re_q;
        im   <= im_q;
        resp <= resp_t'(re_q) * resp_t'(re_q) + resp_t'(im_q) * resp_t'(im_q);
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) resp_valid |-> !resp[RESP_W-1]);

endmodule
