// filter_phase: picks channel groups of the phase stream and packs them.
//
// Each beat of the phase stream carries the 16-bit phases of one 8-channel
// group (128 bits). Groups whose bit is set in the 256-bit keep mask are
// kept, and two kept beats are packed into one 256-bit capture word (the
// earlier beat in the low half), so the capture path runs at full width.
// This lets the processor record the phase time streams of all channels or
// of a chosen subset (for example to build matched filters).
// Control: words 0..7 of cfg_* hold mask bits [32n+31 : 32n]; default is
// all groups kept. Word 8 (any write) clears a half-filled word, used
// before starting a capture.
// Timing: a word leaves 1 cycle after its second half arrives.
// Channel-group selection follows the paper; the packing is this design's.
module filter_phase #(
  parameter int unsigned GROUPS = 256,
  parameter int unsigned IW     = 128
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  logic            in_last,
  input  logic [IW-1:0]   in_data,
  input  logic            cfg_we,
  input  logic [19:0]     cfg_addr,
  input  logic [31:0]     cfg_wdata,
  output logic            out_valid,
  output logic [2*IW-1:0] out_data
);
  localparam int unsigned GW = $clog2(GROUPS);
  localparam int unsigned NW = (GROUPS + 31) / 32;

  logic [NW*32-1:0] keep;
  logic [GW-1:0]    beat;
  logic             half;     // low half holds a kept beat
  logic [IW-1:0]    low;

  always_ff @(posedge clk) begin
    if (rst) keep <= '1;
    else if (cfg_we && cfg_addr < 20'(NW)) keep[32*cfg_addr[$clog2(NW+1)-1:0] +: 32] <= cfg_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      beat <= '0; half <= 1'b0; low <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) beat <= in_last ? '0 : beat + 1'b1;
      if (cfg_we && cfg_addr == 20'(NW)) half <= 1'b0;
      else if (in_valid) begin
        if (keep[beat]) begin
          if (!half) begin
            low  <= in_data;
            half <= 1'b1;
          end else begin
            out_data  <= {in_data, low};
            out_valid <= 1'b1;
            half      <= 1'b0;
          end
        end
      end
    end
  end
endmodule
