// phase_cordic: converts each channel's IQ sample to phase, atan2(Q, I).
//
// After the DDC a photon moves the resonator's IQ point along its loop; the
// angle of that point is a one-dimensional signal whose dip depth measures
// the photon energy. The angle is computed with a pipelined vectoring
// CORDIC, one pipeline per lane: a first stage folds the left half-plane
// onto the right (adding +-pi), then ITER micro-rotations drive Q to zero
// while summing atan(2^-k). Inputs carry GB guard bits so that small
// vectors keep their angle precision. The angle table is computed at elaboration.
//
// Output phase: signed 16 bits, 2^-13 rad per LSB (range +-pi), rounded.
// Timing: ITER + 2 cycles of latency, full rate. The gain of the CORDIC
// does not matter since only the angle is kept.
// Computing tan^-1(Q/I) per channel follows the paper; the CORDIC form,
// iteration count and output format are this design's choices.
module phase_cordic
  import mkid_pkg::iq_t;
#(
  parameter int unsigned LANES = 8,
  parameter int unsigned ITER  = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        in_last,
  input  iq_t [LANES-1:0] in_data,
  output logic        out_valid,
  output logic        out_last,
  output logic signed [LANES-1:0][15:0] out_data
);
  localparam int unsigned GB = 8;    // guard bits below the input LSB
  localparam int unsigned XW = 19 + GB;  // 16-bit input + growth 1.65x + sign
  localparam int unsigned ZW = 21;   // angle, 2^-17 rad per LSB
  localparam int unsigned ZF = 17;

  typedef logic signed [ZW-1:0] atan_t [ITER];
  function automatic atan_t make_atan();
    atan_t t;
    for (int k = 0; k < ITER; k++)
      t[k] = ZW'($rtoi($floor($atan(2.0 ** (-k)) * (2.0 ** ZF) + 0.5)));
    return t;
  endfunction
  localparam atan_t ATAN = make_atan();
  localparam logic signed [ZW-1:0] PI_Z = ZW'($rtoi($floor(3.14159265358979 * (2.0 ** ZF) + 0.5)));

  logic signed [XW-1:0] x [ITER+1][LANES];
  logic signed [XW-1:0] y [ITER+1][LANES];
  logic signed [ZW-1:0] z [ITER+1][LANES];
  logic [ITER+1:0] v, lst;

  // Stage 0: fold into the right half-plane.
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (in_data[l].i < 0) begin
        x[0][l] <= -(XW'(in_data[l].i) <<< GB);
        y[0][l] <= -(XW'(in_data[l].q) <<< GB);
        z[0][l] <= (in_data[l].q >= 0) ? PI_Z : -PI_Z;
      end else begin
        x[0][l] <= XW'(in_data[l].i) <<< GB;
        y[0][l] <= XW'(in_data[l].q) <<< GB;
        z[0][l] <= '0;
      end
    end
  end

  // Micro-rotations: z accumulates the angle rotated out of (x, y).
  always_ff @(posedge clk) begin
    for (int k = 0; k < ITER; k++)
      for (int l = 0; l < LANES; l++) begin
        if (y[k][l] >= 0) begin
          x[k+1][l] <= x[k][l] + (y[k][l] >>> k);
          y[k+1][l] <= y[k][l] - (x[k][l] >>> k);
          z[k+1][l] <= z[k][l] + ATAN[k];
        end else begin
          x[k+1][l] <= x[k][l] - (y[k][l] >>> k);
          y[k+1][l] <= y[k][l] + (x[k][l] >>> k);
          z[k+1][l] <= z[k][l] - ATAN[k];
        end
      end
  end

  // Final stage: round the angle to 2^-13 rad.
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ZW-1:0] a;
      a = z[ITER][l] + ZW'(1 << (ZF - 14));
      out_data[l] <= mkid_pkg::sat16(48'(a >>> (ZF - 13)));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v <= '0; lst <= '0;
    end else begin
      v   <= {v[ITER:0], in_valid};
      lst <= {lst[ITER:0], in_valid && in_last};
    end
  end
  assign out_valid = v[ITER+1];
  assign out_last  = lst[ITER+1];

endmodule
