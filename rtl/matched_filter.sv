// matched_filter: per-channel, reprogrammable FIR on the phase streams.
//
// Each detector pixel gets its own filter built in software from an average
// photon pulse and the channel's noise spectrum (a Wiener/optimal filter
// followed by a low-pass). Applying it before the trigger raises the
// pulse-to-noise ratio and so the energy resolution. Every channel has
// TAPS = 30 signed 16-bit coefficients with 1.0 = 2^14; the default is the
// unity filter (tap 0 = 1.0), which passes the phase through unchanged.
//
// Control: cfg_we with cfg_addr[15:5] = channel, cfg_addr[4:0] = tap,
// cfg_wdata[15:0] = coefficient.
// Timing: 2-cycle latency, full rate (one output per input beat).
// The 30 taps, per-channel run-time programmability and the unity default
// follow the paper; coefficient format and saturation are this design's.
module matched_filter #(
  parameter int unsigned NCH   = 2048,
  parameter int unsigned LANES = 8,
  parameter int unsigned TAPS  = 30
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic signed [LANES-1:0][15:0] in_data,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        out_valid,
  output logic        out_last,
  output logic signed [LANES-1:0][15:0] out_data
);
  localparam int unsigned CW = $clog2(NCH);
  localparam int unsigned TW = $clog2(TAPS);
  localparam logic signed [TAPS-1:0][15:0] UNITY = (TAPS*16)'(16'sd16384);

  logic tap_ok;
  assign tap_ok = (cfg_addr[4:0] < 5'(TAPS));

  mc_fir #(.NCH(NCH), .LANES(LANES), .TAPS(TAPS), .DECIM(1), .PER_CHAN(1'b1),
           .COEF_FRAC(14), .INIT_COEF(UNITY)) u_fir (
    .clk, .rst, .in_valid, .in_last, .in_data,
    .coef_we(cfg_we && tap_ok), .coef_chan(cfg_addr[5 +: CW]), .coef_tap(cfg_addr[TW-1:0]),
    .coef_data(cfg_wdata[15:0]),
    .out_valid, .out_last, .out_data);

endmodule
