// filter_iq: picks channel groups of the IQ stream for calibration capture.
//
// Each beat of the 256-bit IQ stream carries the 8 channels of one group
// (group g = channels 8g .. 8g+7). A 256-bit keep mask, written by the
// processor, says which groups are captured; kept beats leave unchanged as
// 256-bit capture words, others are dropped. Capturing every group records
// the IQ of all 2048 channels (IQ loops during frequency sweeps); capturing
// a few records only those.
// Control: words 0..7 of cfg_* hold mask bits [32n+31 : 32n]; default is
// all groups kept.
// Timing: 1-cycle latency; out_last marks the kept beat of the frame's
// last group when that group is kept.
// Selecting user-requested channel groups follows the paper; the 8-channel
// granularity and mask layout are this design's.
module filter_iq #(
  parameter int unsigned GROUPS = 256,
  parameter int unsigned W      = 256
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic         in_last,
  input  logic [W-1:0] in_data,
  input  logic         cfg_we,
  input  logic [19:0]  cfg_addr,
  input  logic [31:0]  cfg_wdata,
  output logic         out_valid,
  output logic         out_last,
  output logic [W-1:0] out_data
);
  localparam int unsigned GW = $clog2(GROUPS);
  localparam int unsigned NW = (GROUPS + 31) / 32;

  logic [NW*32-1:0] keep;
  logic [GW-1:0]    beat;

  always_ff @(posedge clk) begin
    if (rst) keep <= '1;
    else if (cfg_we && cfg_addr < 20'(NW)) keep[32*cfg_addr[$clog2(NW+1)-1:0] +: 32] <= cfg_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      beat <= '0; out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= in_valid && keep[beat];
      out_last  <= in_valid && in_last && keep[beat];
      if (in_valid) begin
        out_data <= in_data;
        beat <= in_last ? '0 : beat + 1'b1;
      end
    end
  end
endmodule
