// mkid_pkg: types and constants shared by the MKID readout pipeline.
//
// The readout channelizes a quadrature-sampled 4.096 GS/s band into 2048
// detector channels. The programmable logic runs on one 512 MHz clock, so
// every stream moves 8 (or 16, ahead of bin selection) samples per beat. A
// "frame" is one pass over all channels: 256 beats of 8 channels, where
// channel c travels in beat c/8 on lane c%8. Beats carry valid and last
// (last marks beat 255) and there is no backpressure in the DSP chain.
//
// Complex samples are 16-bit I and 16-bit Q packed into 32 bits, phases are
// signed 16-bit with 2^-13 rad per LSB, and timestamps count microseconds
// in 36 bits. The channel count, lane counts and 36-bit timestamp follow
// the paper; the per-sample formats are this design's choice.
package mkid_pkg;

  localparam int unsigned NCHAN     = 2048;  // readout channels
  localparam int unsigned NBINS     = 4096;  // OPFB coarse bins
  localparam int unsigned LANES     = 8;     // channels per beat after bin select
  localparam int unsigned OPFB_LANES = 16;   // bins per beat out of the OPFB
  localparam int unsigned SAMPLE_W  = 16;    // I, Q and phase width
  localparam int unsigned TS_W      = 36;    // timestamp width (microseconds)
  localparam int unsigned PHASE_FRAC = 13;   // phase LSB = 2^-13 rad

  typedef struct packed {
    logic signed [15:0] q;
    logic signed [15:0] i;
  } iq_t;

  // One photon event as written to processor memory (64 bits).
  typedef struct packed {
    logic [TS_W-1:0]    ts;     // microsecond timestamp of the trigger sample
    logic [11:0]        chan;   // channel number
    logic signed [15:0] phase;  // minimum phase inside the holdoff window
  } photon_t;

  // Block select field of the control address map (byte address [25:22]).
  typedef enum logic [3:0] {
    BLK_DAC   = 4'd0,
    BLK_BINSEL = 4'd1,
    BLK_DDC   = 4'd2,
    BLK_MF    = 4'd3,
    BLK_TRIG  = 4'd4,
    BLK_TIME  = 4'd5,
    BLK_PHOT  = 4'd6,
    BLK_POST  = 4'd7,
    BLK_CAP   = 4'd8
  } blk_e;

  function automatic logic signed [15:0] sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sd32767;
    else if (v < -48'sd32768) return -16'sd32768;
    else                      return v[15:0];
  endfunction

endpackage
