// ddc: final per-channel down-conversion and IQ-loop coordinate transform.
//
// Each selected OPFB bin still holds its readout tone somewhere within
// +-1 MHz of the bin centre. For every channel the block keeps a phase
// accumulator that advances by the channel's increment once per frame
// (one coarse sample, 2 MHz), adds the channel's fixed phase offset, and
// multiplies the sample by exp(-j*theta) from a cosine table. This moves the
// tone to 0 Hz and at the same time rotates the resonator's IQ loop by the
// offset. The loop centre (a complex constant per channel) is then
// subtracted, so that the photon response is a phase swing around 0.
//
//   y = x * exp(-j*(acc + offset)) - centre,  acc += inc every frame
//
// theta is 16 bits for a full turn (inc = f_offset / 2 MHz * 65536). The
// cosine table has 2^LUT_AW entries of Q1.15, computed at elaboration;
// sin(theta) is read as cos(theta - quarter turn). Products are truncated.
//
// Control: cfg_addr[12:11] selects 0 = increment, 1 = offset, 2 = centre
// ({Q,I}); cfg_addr[10:0] is the channel. Everything resets to 0.
// Timing: 3-cycle latency, one beat of LANES channels per cycle.
// Following the paper: conjugate-tone multiply with optional per-channel
// phase offset, internal cosine table, complex centre subtraction, all
// values per channel. Widths and the rotate-then-centre order are this
// design's choices.
module ddc
  import mkid_pkg::iq_t;
#(
  parameter int unsigned NCH    = 2048,
  parameter int unsigned LANES  = 8,
  parameter int unsigned ACC_W  = 16,
  parameter int unsigned LUT_AW = 10
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  iq_t [LANES-1:0] in_data,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        out_valid,
  output logic        out_last,
  output iq_t [LANES-1:0] out_data
);
  localparam int unsigned GROUPS = NCH / LANES;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned LUTN   = 1 << LUT_AW;

  typedef logic signed [15:0] lut_t [LUTN];
  function automatic lut_t make_cos();
    lut_t t;
    for (int k = 0; k < LUTN; k++)
      t[k] = 16'($rtoi($floor($cos(2.0 * 3.14159265358979 * k / LUTN) * 32767.0 + 0.5)));
    return t;
  endfunction
  localparam lut_t COS_LUT = make_cos();

  logic [ACC_W-1:0] acc  [LANES][GROUPS];
  logic [ACC_W-1:0] inc  [LANES][GROUPS];
  logic [ACC_W-1:0] offs [LANES][GROUPS];
  iq_t              ctr  [LANES][GROUPS];

  initial begin
    for (int l = 0; l < LANES; l++)
      for (int g = 0; g < GROUPS; g++) begin
        acc[l][g] = '0; inc[l][g] = '0; offs[l][g] = '0; ctr[l][g] = '0;
      end
  end

  logic [GW-1:0] beat;
  always_ff @(posedge clk) begin
    if (rst)            beat <= '0;
    else if (in_valid)  beat <= in_last ? '0 : beat + 1'b1;
  end

  wire [LW-1:0] wl = cfg_addr[LW-1:0];
  wire [GW-1:0] wg = cfg_addr[LW+GW-1:LW];

  // Configuration writes and accumulator update share the memories.
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (cfg_addr[12:11])
        2'd0:    inc[wl][wg]  <= cfg_wdata[ACC_W-1:0];
        2'd1:    offs[wl][wg] <= cfg_wdata[ACC_W-1:0];
        2'd2:    ctr[wl][wg]  <= iq_t'(cfg_wdata);
        default: ;
      endcase
    end
    if (in_valid)
      for (int l = 0; l < LANES; l++) acc[l][beat] <= acc[l][beat] + inc[l][beat];
  end

  // Stage 1: theta and centre for each lane.
  logic [LANES-1:0][ACC_W-1:0] s1_theta;
  iq_t  [LANES-1:0] s1_x, s1_c;
  logic s1_valid, s1_last;
  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0; s1_last <= 1'b0;
    end else begin
      s1_valid <= in_valid; s1_last <= in_valid && in_last;
    end
    for (int l = 0; l < LANES; l++) begin
      s1_theta[l] <= acc[l][beat] + offs[l][beat];
      s1_x[l]     <= in_data[l];
      s1_c[l]     <= ctr[l][beat];
    end
  end

  // Stage 2: table look-up.
  logic signed [LANES-1:0][15:0] s2_cos, s2_sin;
  iq_t  [LANES-1:0] s2_x, s2_c;
  logic s2_valid, s2_last;
  always_ff @(posedge clk) begin
    if (rst) begin
      s2_valid <= 1'b0; s2_last <= 1'b0;
    end else begin
      s2_valid <= s1_valid; s2_last <= s1_last;
    end
    for (int l = 0; l < LANES; l++) begin
      logic [LUT_AW-1:0] a;
      a = s1_theta[l][ACC_W-1 -: LUT_AW];
      s2_cos[l] <= COS_LUT[a];
      s2_sin[l] <= COS_LUT[a - LUT_AW'(LUTN / 4)];
      s2_x[l]   <= s1_x[l];
      s2_c[l]   <= s1_c[l];
    end
  end

  // Stage 3: complex multiply by conj(exp(j theta)) and centre subtraction.
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_last <= 1'b0;
    end else begin
      out_valid <= s2_valid; out_last <= s2_last;
    end
    for (int l = 0; l < LANES; l++) begin
      logic signed [32:0] re, im;
      logic signed [17:0] yr, yi;
      logic signed [15:0] ci, cq;
      logic signed [15:0] xi, xq, c, s;
      xi = s2_x[l].i; xq = s2_x[l].q; c = s2_cos[l]; s = s2_sin[l];
      re = 33'(xi * c) + 33'(xq * s);
      im = 33'(xq * c) - 33'(xi * s);
      ci = s2_c[l].i; cq = s2_c[l].q;
      yr = 18'(re >>> 15) - 18'(ci);
      yi = 18'(im >>> 15) - 18'(cq);
      out_data[l].i <= mkid_pkg::sat16(48'(yr));
      out_data[l].q <= mkid_pkg::sat16(48'(yi));
    end
  end

endmodule
