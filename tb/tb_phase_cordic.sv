// tb_phase_cordic: random and corner-case IQ samples through the 8-lane
// CORDIC; each phase must equal atan2(Q, I) * 2^13 within 2 LSB (8 LSB for
// vectors shorter than 64, where the word length limits precision), and the
// first result must appear ITER + 2 = 18 cycles after the first input.
module tb_phase_cordic;
  import mkid_pkg::*;
  localparam int L = 8, NB = 400;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; iq_t [L-1:0] in_data = '0;
  logic out_valid, out_last; logic signed [L-1:0][15:0] out_data;
  int checks = 0, failures = 0;
  iq_t stim [NB][L];

  phase_cordic #(.LANES(L), .ITER(16)) dut (.*);

  int ob = 0, cyc = 0, t_in = -1, t_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && t_in < 0) t_in = cyc;
    if (!rst && out_valid) begin
      if (t_out < 0) t_out = cyc;
      for (int l = 0; l < L; l++) begin
        real a; int e, d, tol;
        logic signed [15:0] si, sq, o;
        si = stim[ob][l].i; sq = stim[ob][l].q; o = out_data[l];
        a = $atan2(real'(sq), real'(si));
        e = int'(a * 8192.0);
        d = int'(o) - e;
        tol = ($sqrt(real'(si) * si + real'(sq) * sq) < 64.0) ? 8 : 2;
        // +pi and -pi are the same angle
        if (d > 50000) d -= 51472;
        if (d < -50000) d += 51472;
        checks++;
        if (d > tol || d < -tol) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) got %0d exp %0d", si, sq, o, e);
        end
      end
      ob++;
    end
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int l = 0; l < L; l++) begin
        int r; r = $urandom_range(32767);
        stim[b][l] = '{q: 16'($urandom), i: 16'($urandom)};
        if (b < 2) begin   // axes and diagonals
          case (l)
            0: stim[b][l] = '{q: 16'sd0,     i: 16'sd20000};
            1: stim[b][l] = '{q: 16'sd20000, i: 16'sd0};
            2: stim[b][l] = '{q: -16'sd20000, i: 16'sd0};
            3: stim[b][l] = '{q: 16'sd1000,  i: -16'sd30000};
            4: stim[b][l] = '{q: -16'sd1000, i: -16'sd30000};
            5: stim[b][l] = '{q: 16'(r),     i: 16'(r)};
            6: stim[b][l] = '{q: -16'sd32768, i: -16'sd32768};
            default: stim[b][l] = '{q: 16'sd3, i: -16'sd5};
          endcase
        end
      end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk); in_valid = 1; in_last = (b == NB - 1);
      for (int l = 0; l < L; l++) in_data[l] = stim[b][l];
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (25) @(posedge clk);
    checks++; if (ob != NB) begin failures++; $display("FAIL %0d outputs", ob); end
    checks++; if (t_out - t_in != 18) begin failures++; $display("FAIL latency %0d", t_out - t_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
