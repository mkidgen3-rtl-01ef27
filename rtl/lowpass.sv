// lowpass: per-channel low-pass filter and decimate-by-2 after the DDC.
//
// The OPFB bins are 2 MHz wide and overlap by half, so after down-conversion
// a channel can still contain a neighbouring resonator's tone. This block
// low-pass filters I and Q of every channel and keeps every second sample,
// turning 2048 channels at 2 MHz into 2048 fine channels at 1 MHz, each
// with its own tone at 0 Hz.
//
// I and Q are filtered by two mc_fir instances with one shared, fixed set
// of TAPS coefficients: a Hamming-windowed sinc with cutoff at a quarter of
// the input sample rate (0.5 MHz), Q1.15, normalised to unity DC gain:
//   h[k] = w[k] * sinc((k - (TAPS-1)/2) / 2) / sum, w = Hamming
// Timing: 2-cycle latency; out_valid is high on every other frame only.
// The function (low-pass + decimate to 1 MHz) follows the paper; the tap
// count and coefficients are this design's.
module lowpass
  import mkid_pkg::iq_t;
#(
  parameter int unsigned NCH   = 2048,
  parameter int unsigned LANES = 8,
  parameter int unsigned TAPS  = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  iq_t [LANES-1:0] in_data,
  output logic        out_valid,
  output logic        out_last,
  output iq_t [LANES-1:0] out_data
);
  typedef logic signed [TAPS-1:0][15:0] taps_t;

  function automatic taps_t make_taps();
    real h [TAPS];
    real sum, x, pi;
    taps_t t;
    pi  = 3.14159265358979;
    sum = 0.0;
    for (int k = 0; k < TAPS; k++) begin
      x = (k - (TAPS - 1) / 2.0) / 2.0;
      h[k] = (0.54 - 0.46 * $cos(2.0 * pi * k / (TAPS - 1))) * $sin(pi * x) / (pi * x);
      sum += h[k];
    end
    for (int k = 0; k < TAPS; k++) t[k] = 16'($rtoi($floor(h[k] / sum * 32768.0 + 0.5)));
    return t;
  endfunction
  localparam taps_t LP_TAPS = make_taps();

  logic signed [LANES-1:0][15:0] in_i, in_q, out_i, out_q;
  logic vi, vq, li, lq;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      in_i[l] = in_data[l].i;
      in_q[l] = in_data[l].q;
      out_data[l] = '{q: out_q[l], i: out_i[l]};
    end
  end

  mc_fir #(.NCH(NCH), .LANES(LANES), .TAPS(TAPS), .DECIM(2), .PER_CHAN(1'b0),
           .COEF_FRAC(15), .INIT_COEF(LP_TAPS)) u_fir_i (
    .clk, .rst, .in_valid, .in_last, .in_data(in_i),
    .coef_we(1'b0), .coef_chan('0), .coef_tap('0), .coef_data('0),
    .out_valid(vi), .out_last(li), .out_data(out_i));

  mc_fir #(.NCH(NCH), .LANES(LANES), .TAPS(TAPS), .DECIM(2), .PER_CHAN(1'b0),
           .COEF_FRAC(15), .INIT_COEF(LP_TAPS)) u_fir_q (
    .clk, .rst, .in_valid, .in_last, .in_data(in_q),
    .coef_we(1'b0), .coef_chan('0), .coef_tap('0), .coef_data('0),
    .out_valid(vq), .out_last(lq), .out_data(out_q));

  assign out_valid = vi;
  assign out_last  = li;

  // Both halves run in lock step.
  always_ff @(posedge clk) if (!rst) assert (vi == vq && li == lq);

endmodule
