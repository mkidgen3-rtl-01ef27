// tb_lowpass: low-pass + decimate-by-2 on 16 channels. One channel gets an
// impulse, one a DC level and one a tone at the input Nyquist frequency
// (sign flips every sample). Checks: the impulse response equals the
// even-indexed taps of a 16-tap Hamming-windowed sinc (cutoff fs/4)
// computed here in real arithmetic, DC passes with unity gain, the
// Nyquist tone is rejected, and outputs appear on every other frame only.
module tb_lowpass;
  import mkid_pkg::*;
  localparam int NC = 16, L = 8, G = NC / L, T = 16, NF = 40;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; iq_t [L-1:0] in_data = '0;
  logic out_valid, out_last; iq_t [L-1:0] out_data;
  int checks = 0, failures = 0;
  real h [T];

  lowpass #(.NCH(NC), .LANES(L), .TAPS(T)) dut (.*);

  int ob = 0, of = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    for (int l = 0; l < L; l++) begin
      int c, n, e, d;
      logic signed [15:0] oi, oq;
      oi = out_data[l].i; oq = out_data[l].q;
      c = ob * L + l;
      n = 2 * of;                       // input frame of this output
      case (c)
        3: e = (n < T) ? int'($floor(h[n] * 20000.0)) : 0;     // impulse 20000 at frame 0
        9: e = (n >= T) ? 12000 : -999999;                     // DC 12000
        12: e = (n >= T) ? 0 : -999999;                        // Nyquist tone
        default: e = 0;
      endcase
      if (e != -999999) begin
        d = int'(oi) - e;
        checks++;
        if (d > 3 || d < -3) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d ch %0d got %0d exp %0d", of, c, oi, e);
        end
        checks++;
        if (c == 3 && oq != oi) failures++;
      end
    end
    if (ob == G - 1) begin ob = 0; of++; end else ob++;
  end

  initial begin
    real sum, x, pi;
    pi = 3.14159265358979; sum = 0;
    for (int k = 0; k < T; k++) begin
      x = (k - (T - 1) / 2.0) / 2.0;
      h[k] = (0.54 - 0.46 * $cos(2.0 * pi * k / (T - 1))) * $sin(pi * x) / (pi * x);
      sum += h[k];
    end
    for (int k = 0; k < T; k++) h[k] = h[k] / sum;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int f = 0; f < NF; f++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        in_valid = 1; in_last = (g == G - 1);
        for (int l = 0; l < L; l++) begin
          int c; c = g * L + l;
          in_data[l] = '0;
          if (c == 3 && f == 0) in_data[l] = '{q: 16'sd20000, i: 16'sd20000};
          if (c == 9)  in_data[l].i = 16'sd12000;
          if (c == 12) in_data[l].i = (f % 2) ? -16'sd15000 : 16'sd15000;
        end
      end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (of != NF / 2) begin failures++; $display("FAIL %0d output frames, expected %0d", of, NF / 2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
