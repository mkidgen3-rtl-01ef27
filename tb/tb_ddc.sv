// tb_ddc: per-channel down-conversion check at full size (2048 channels).
// A few channels get a phase increment, a phase offset and a loop centre;
// all channels carry a constant input. Each output sample is compared
// with x * exp(-j*2*pi*(n*inc + off)/65536) - centre computed in real
// arithmetic (tolerance 65 LSB covers the truncated 10-bit table address), and the 3-cycle
// latency is checked.
module tb_ddc;
  import mkid_pkg::*;
  localparam int NC = 2048, L = 8, G = NC / L;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; iq_t [L-1:0] in_data = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic out_valid, out_last; iq_t [L-1:0] out_data;
  int checks = 0, failures = 0;
  int inc [NC], off [NC], ci [NC], cq [NC], xi [NC], xq [NC];

  ddc #(.NCH(NC), .LANES(L)) dut (.*);

  task automatic wr(input int sel, input int ch, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'((sel << 11) | ch); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  int ob = 0, of = 0, maxerr = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    for (int l = 0; l < L; l++) begin
      int c; real th, er, ei; int di, dq;
      c  = ob * L + l;
      th = 2.0 * 3.14159265358979 * real'((of * inc[c] + off[c]) % 65536) / 65536.0;
      er = xi[c] * $cos(th) + xq[c] * $sin(th) - ci[c];
      ei = xq[c] * $cos(th) - xi[c] * $sin(th) - cq[c];
      di = int'(out_data[l].i) - int'(er);
      dq = int'(out_data[l].q) - int'(ei);
      if (di < 0) di = -di;
      if (dq < 0) dq = -dq;
      if (di > maxerr) maxerr = di;
      if (dq > maxerr) maxerr = dq;
      checks++;
      if (di > 65 || dq > 65) begin
        failures++;
        if (failures < 4) $display("FAIL f%0d ch%0d got %h %h %0d,%0d exp %f,%f", of, c, out_data[l], out_data[l].i, int'(out_data[l].i), int'(out_data[l].q), er, ei);
      end
    end
    if (ob == G - 1) begin ob = 0; of++; end else ob++;
  end

  // Latency: input beat at edge E -> output valid after edge E+3.
  int in_t = -1, out_t = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_t < 0) in_t = cyc;
    if (out_valid && out_t < 0) out_t = cyc;
  end

  initial begin
    for (int c = 0; c < NC; c++) begin
      inc[c] = 0; off[c] = 0; ci[c] = 0; cq[c] = 0;
      xi[c] = 8000 + (c % 7) * 100; xq[c] = -3000 + (c % 5) * 500;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 24; k++) begin
      int c; c = $urandom_range(NC - 1);
      inc[c] = $urandom_range(65535); off[c] = $urandom_range(65535);
      ci[c] = int'($urandom_range(4000)) - 2000; cq[c] = int'($urandom_range(4000)) - 2000;
      wr(0, c, 32'(inc[c])); wr(1, c, 32'(off[c])); wr(2, c, {16'(cq[c]), 16'(ci[c])});
    end
    for (int f = 0; f < 6; f++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        in_valid = 1; in_last = (g == G - 1);
        for (int l = 0; l < L; l++) in_data[l] = '{q: 16'(xq[g*L+l]), i: 16'(xi[g*L+l])};
      end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (out_t - in_t != 3) begin failures++; $display("FAIL latency %0d", out_t - in_t); end
    checks++;
    if (of != 6) begin failures++; $display("FAIL frames %0d", of); end
    $display("max error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
