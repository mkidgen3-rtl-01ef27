// mc_fir: time-multiplexed multichannel FIR filter for real samples.
//
// LANES channels arrive per beat and NCH/LANES beats make a frame, so each
// channel sees one sample per frame. The block keeps, per channel, the last
// TAPS-1 samples in a history memory; when a channel's new sample arrives
// the full TAPS-sample window is multiplied by the coefficients and summed,
// and the history is shifted and written back. Coefficients are either one
// shared set (PER_CHAN = 0) or a separate set per channel (PER_CHAN = 1).
//
//   y[n] = sat( sum_k c[k] * x[n-k] >>> COEF_FRAC )
//
// With DECIM = 2 an output is produced only on even frames (frame parity
// kept by counting last beats), giving a decimate-by-2 filter; the history
// is still updated every frame.
//
// Coefficient writes: coef_we with coef_chan (ignored when shared) and
// coef_tap. Initial coefficients are INIT_COEF (for all channels).
// Timing: 2-cycle latency; out_last marks the last beat of an output frame.
// This is a generic helper written for this design.
module mc_fir #(
  parameter int unsigned NCH       = 2048,
  parameter int unsigned LANES     = 8,
  parameter int unsigned TAPS      = 30,
  parameter int unsigned DECIM     = 1,
  parameter bit          PER_CHAN  = 1'b1,
  parameter int unsigned COEF_FRAC = 14,
  parameter logic signed [TAPS-1:0][15:0] INIT_COEF = '0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic signed [LANES-1:0][15:0] in_data,
  input  logic        coef_we,
  input  logic [$clog2(NCH)-1:0] coef_chan,
  input  logic [$clog2(TAPS)-1:0] coef_tap,
  input  logic signed [15:0] coef_data,
  output logic        out_valid,
  output logic        out_last,
  output logic signed [LANES-1:0][15:0] out_data
);
  localparam int unsigned GROUPS = NCH / LANES;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned CSETS  = PER_CHAN ? GROUPS : 1;
  localparam int unsigned CSW    = (CSETS > 1) ? $clog2(CSETS) : 1;

  typedef logic signed [TAPS-1:0][15:0] taps_t;
  typedef logic signed [TAPS-2:0][15:0] hist_t;

  hist_t hist [LANES][GROUPS];
  taps_t coef [LANES][CSETS];

  initial begin
    for (int l = 0; l < LANES; l++) begin
      for (int g = 0; g < GROUPS; g++) hist[l][g] = '0;
      for (int s = 0; s < CSETS; s++)  coef[l][s] = INIT_COEF;
    end
  end

  // Coefficient writes (shared set: write the tap in every lane copy).
  always_ff @(posedge clk) begin
    if (coef_we) begin
      for (int l = 0; l < LANES; l++)
        if (!PER_CHAN || coef_chan[LW-1:0] == LW'(l))
          coef[l][PER_CHAN ? CSW'(coef_chan >> LW) : CSW'(0)][coef_tap] <= coef_data;
    end
  end

  logic [GW-1:0] beat;
  logic          odd_frame;
  always_ff @(posedge clk) begin
    if (rst) begin
      beat <= '0; odd_frame <= 1'b0;
    end else if (in_valid) begin
      if (in_last) begin
        beat <= '0;
        odd_frame <= (DECIM > 1) ? ~odd_frame : 1'b0;
      end else beat <= beat + 1'b1;
    end
  end

  wire [CSW-1:0] cset = PER_CHAN ? CSW'(beat) : CSW'(0);

  // Stage 1: form window, products summed, history write-back.
  logic signed [LANES-1:0][47:0] s1_acc;
  logic s1_valid, s1_last;
  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0; s1_last <= 1'b0;
    end else begin
      s1_valid <= in_valid && !odd_frame;
      s1_last  <= in_valid && in_last && !odd_frame;
    end
    for (int l = 0; l < LANES; l++) begin
      taps_t win;
      logic signed [47:0] a;
      win = {hist[l][beat], in_data[l]};   // win[0] = newest sample
      a = '0;
      for (int k = 0; k < TAPS; k++) a += 48'($signed(win[k]) * $signed(coef[l][cset][k]));
      s1_acc[l] <= a;
      if (in_valid) hist[l][beat] <= win[TAPS-2:0];
    end
  end

  // Stage 2: scale and saturate.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= s1_valid; out_last <= s1_last;
    end
    for (int l = 0; l < LANES; l++)
      out_data[l] <= mkid_pkg::sat16($signed(s1_acc[l]) >>> COEF_FRAC);
  end

endmodule
