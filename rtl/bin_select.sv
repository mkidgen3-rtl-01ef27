// bin_select: picks 2048 channel slots out of the 4096 OPFB bins.
//
// Every frame the OPFB delivers NBINS bins, IN_LANES per beat (bin b arrives
// in beat b / IN_LANES on lane b % IN_LANES). Each of the LANES output lanes
// keeps its own copy of the frame, so the eight lanes can read any bin in
// any order, including the same bin many times (several tones in one bin,
// or in the extreme all channels on one bin). Each copy is two banks of
// NBINS/IN_LANES rows: the current frame is written into one bank while the
// previous frame is read from the other.
//
// Output channel c = beat*LANES + lane takes bin map[c]. Output beats are
// produced in step with the input beats, starting with the second frame,
// so the output lags the input by one frame plus 2 cycles.
//
// Control: cfg_we with cfg_addr[10:0] = channel writes bin cfg_wdata[11:0].
// Before programming, channel c maps to bin 2c. The eight cached copies and
// the user-programmable channel order follow the paper; the ping-pong
// banking and default map are this design's.
module bin_select
  import mkid_pkg::iq_t;
#(
  parameter int unsigned NBINS    = 4096,
  parameter int unsigned NCH      = 2048,
  parameter int unsigned IN_LANES = 16,
  parameter int unsigned OUT_LANES = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  iq_t [IN_LANES-1:0] in_data,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        out_valid,
  output logic        out_last,
  output iq_t [OUT_LANES-1:0] out_data
);
  localparam int unsigned ROWS   = NBINS / IN_LANES;   // input beats per frame
  localparam int unsigned GROUPS = NCH / OUT_LANES;    // output beats per frame
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned BINW   = $clog2(NBINS);
  localparam int unsigned LW     = $clog2(IN_LANES);
  localparam int unsigned OLW    = $clog2(OUT_LANES);

  initial assert (ROWS == GROUPS)
    else $error("bin_select: input and output beats per frame must match");

  // Frame copies: [lane][bank][row] of one full input beat.
  iq_t [IN_LANES-1:0] frame [OUT_LANES][2][ROWS];
  logic [BINW-1:0]    chmap [OUT_LANES][GROUPS];

  initial begin
    for (int l = 0; l < OUT_LANES; l++)
      for (int g = 0; g < GROUPS; g++) chmap[l][g] = BINW'(2 * (g * OUT_LANES + l));
  end

  always_ff @(posedge clk) begin
    if (cfg_we)
      chmap[cfg_addr[OLW-1:0]][cfg_addr[OLW+GW-1:OLW]] <= cfg_wdata[BINW-1:0];
  end

  logic [RW-1:0] beat;
  logic          bank;      // bank being written
  logic          primed;    // one full frame stored

  always_ff @(posedge clk) begin
    if (rst) begin
      beat   <= '0;
      bank   <= 1'b0;
      primed <= 1'b0;
    end else if (in_valid) begin
      if (in_last) begin
        beat   <= '0;
        bank   <= ~bank;
        primed <= 1'b1;
      end else begin
        beat <= beat + 1'b1;
      end
    end
  end

  // Write: all lane copies take the same beat.
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int l = 0; l < OUT_LANES; l++) frame[l][bank][beat] <= in_data;
  end

  // Read stage 1: look up the bin of each lane's channel, register row/lane.
  logic [OUT_LANES-1:0][RW-1:0] rd_row;
  logic [OUT_LANES-1:0][LW-1:0] rd_lane;
  logic s1_valid, s1_last, s1_bank;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
      s1_bank  <= 1'b0;
    end else begin
      s1_valid <= in_valid && primed;
      s1_last  <= in_last;
      s1_bank  <= ~bank;
    end
    for (int l = 0; l < OUT_LANES; l++) begin
      rd_row[l]  <= chmap[l][GW'(beat)][BINW-1:LW];
      rd_lane[l] <= chmap[l][GW'(beat)][LW-1:0];
    end
  end

  // Read stage 2: each lane reads its own copy and picks the bin.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= s1_valid;
      out_last  <= s1_valid && s1_last;
    end
    for (int l = 0; l < OUT_LANES; l++)
      out_data[l] <= frame[l][s1_bank][rd_row[l]][rd_lane[l]];
  end

endmodule
