// trigger: per-channel photon trigger with holdoff and peak (minimum) search.
//
// A photon shows up as a negative-going pulse in the filtered phase. Each
// channel has an 8-bit signed threshold and a holdoff. While a channel is
// idle, a sample below its threshold triggers it: the current timestamp is
// stored, the running minimum starts at that sample and a counter is loaded
// with the holdoff. Each following sample of the channel updates the
// minimum and counts down; on the holdoff-th sample after the trigger the
// photon {trigger time, channel, minimum phase} is emitted and the channel
// may trigger again on its next sample.
//
// Threshold scaling: 1 LSB = 2^-6 rad (about 0.016 rad), i.e. the phase is
// compared with thr << 7 in the 2^-13 rad phase format; range -2 .. +1.98
// rad. Holdoff writes are clamped to 8 .. 254 samples (microseconds).
// Defaults: threshold -128 (-2 rad), holdoff 8.
//
// Control: cfg_we, cfg_addr[10:0] = channel, cfg_wdata = {holdoff[15:8],
// threshold[7:0]}.
// Outputs (registered, one cycle after the phase beat): phot_valid[lane]
// with phot[lane] for completed photons, and trig_valid[lane] / trig_group
// (the beat index) marking trigger samples, used by postage capture.
// The threshold/holdoff/minimum behaviour, 8-bit threshold and 8..254
// holdoff range follow the paper; the threshold LSB and record layout are
// this design's readings.
module trigger
  import mkid_pkg::photon_t;
#(
  parameter int unsigned NCH   = 2048,
  parameter int unsigned LANES = 8,
  parameter int unsigned TS_W  = 36,
  parameter int unsigned HOLDOFF_MIN = 8,
  parameter int unsigned HOLDOFF_MAX = 254
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  logic signed [LANES-1:0][15:0] in_data,
  input  logic [TS_W-1:0] ts,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic [LANES-1:0] phot_valid,
  output photon_t [LANES-1:0] phot,
  output logic [LANES-1:0] trig_valid,
  output logic [$clog2(NCH/LANES)-1:0] trig_group
);
  localparam int unsigned GROUPS = NCH / LANES;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned LW     = $clog2(LANES);

  typedef struct packed {
    logic [7:0]         cnt;    // samples left in holdoff, 0 = idle
    logic signed [15:0] minv;
    logic [TS_W-1:0]    t;
  } chstate_t;

  logic signed [7:0] thr  [LANES][GROUPS];
  logic [7:0]        hold [LANES][GROUPS];
  chstate_t          st   [LANES][GROUPS];

  initial begin
    for (int l = 0; l < LANES; l++)
      for (int g = 0; g < GROUPS; g++) begin
        thr[l][g] = -8'sd128; hold[l][g] = 8'(HOLDOFF_MIN); st[l][g] = '0;
      end
  end

  logic [7:0] hold_w;
  always_comb begin
    hold_w = cfg_wdata[15:8];
    if (hold_w < 8'(HOLDOFF_MIN)) hold_w = 8'(HOLDOFF_MIN);
    if (hold_w > 8'(HOLDOFF_MAX)) hold_w = 8'(HOLDOFF_MAX);
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      thr[cfg_addr[LW-1:0]][cfg_addr[LW+GW-1:LW]]  <= cfg_wdata[7:0];
      hold[cfg_addr[LW-1:0]][cfg_addr[LW+GW-1:LW]] <= hold_w;
    end
  end

  logic [GW-1:0] beat;
  always_ff @(posedge clk) begin
    if (rst)           beat <= '0;
    else if (in_valid) beat <= in_last ? '0 : beat + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phot_valid <= '0;
      trig_valid <= '0;
      trig_group <= '0;
    end else begin
      phot_valid <= '0;
      trig_valid <= '0;
      trig_group <= beat;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          chstate_t s;
          logic signed [15:0] p, th;
          s  = st[l][beat];
          p  = in_data[l];
          th = {thr[l][beat][7], thr[l][beat], 7'd0};   // thr * 2^7
          if (s.cnt == '0) begin
            if (p < th) begin
              s.cnt  = hold[l][beat];
              s.minv = p;
              s.t    = ts;
              trig_valid[l] <= 1'b1;
            end
          end else begin
            if (p < s.minv) s.minv = p;
            s.cnt = s.cnt - 1'b1;
            if (s.cnt == '0) begin
              phot_valid[l] <= 1'b1;
              phot[l] <= '{ts: s.t, chan: 12'(beat * LANES + l), phase: s.minv};
            end
          end
          st[l][beat] <= s;
        end
      end
    end
  end

endmodule
