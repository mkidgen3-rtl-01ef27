// timestamps: microsecond time keeper for photon time tags.
//
// A prescaler divides the 512 MHz clock down to a 1 us tick and a 36-bit
// counter counts ticks; 2^36 us is about 19.1 hours. The count is meant to
// be UTC-based: ts = UTC_second * 10^6 + microseconds into the second,
// modulo 2^36. For that the processor, which knows UTC from NTP, writes the
// second that the next GPS pulse-per-second (PPS) edge starts; in PPS mode
// that edge loads ts = second * 10^6 and restarts the prescaler, so all
// boards tag photons on the same time base. In free-running mode the PPS
// input is ignored. The processor can also load the counter directly.
//
// Control (word addresses): 0: bit 0 = mode (0 free-run, 1 PPS);
//   1: UTC second for the next PPS edge; 2: direct load value [31:0];
//   3: direct load value [35:32], applied on this write.
// Timing: ts changes one cycle after us_tick; PPS passes a 2-flop
// synchronizer, so a PPS edge takes effect 3 cycles after it arrives.
// The 1 us resolution, 36-bit width and PPS/UTC alignment follow the paper;
// the register map and mode encoding are this design's.
module timestamps #(
  parameter int unsigned TS_W       = 36,
  parameter int unsigned CLK_PER_US = 512
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            pps,
  input  logic            cfg_we,
  input  logic [19:0]     cfg_addr,
  input  logic [31:0]     cfg_wdata,
  output logic [TS_W-1:0] ts,
  output logic            us_tick,
  output logic            pps_seen
);
  localparam int unsigned PW = $clog2(CLK_PER_US);

  logic [2:0]    pps_sync;
  logic          pps_edge;
  logic          mode_pps;
  logic [31:0]   next_sec;
  logic [31:0]   load_lo;
  logic [PW-1:0] pre;

  always_ff @(posedge clk) begin
    if (rst) pps_sync <= '0;
    else     pps_sync <= {pps_sync[1:0], pps};
  end
  assign pps_edge = pps_sync[1] && !pps_sync[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      mode_pps <= 1'b0;
      next_sec <= '0;
      load_lo  <= '0;
    end else if (cfg_we) begin
      case (cfg_addr[1:0])
        2'd0: mode_pps <= cfg_wdata[0];
        2'd1: next_sec <= cfg_wdata;
        2'd2: load_lo  <= cfg_wdata;
        default: ;
      endcase
    end
  end

  assign us_tick = (pre == PW'(CLK_PER_US - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      pre      <= '0;
      ts       <= '0;
      pps_seen <= 1'b0;
    end else if (cfg_we && cfg_addr[1:0] == 2'd3) begin
      ts  <= TS_W'({cfg_wdata[3:0], load_lo});
      pre <= '0;
    end else if (mode_pps && pps_edge) begin
      ts       <= TS_W'(64'(next_sec) * 64'd1000000);
      pre      <= '0;
      pps_seen <= 1'b1;
    end else begin
      pre <= us_tick ? '0 : pre + 1'b1;
      if (us_tick) ts <= ts + 1'b1;
    end
  end

endmodule
