// tb_matched_filter: 64 channels, 30 taps. All channels start with the
// unity filter (output = input). Two channels are then given their own
// random taps; random phase streams run through all channels and every
// output is compared with a direct-form FIR computed here per channel
// (sum of c[k] x[n-k] >> 14, saturated), with the 2-cycle latency.
module tb_matched_filter;
  localparam int NC = 64, L = 8, G = NC / L, T = 30, NF = 80;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; logic signed [L-1:0][15:0] in_data = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic out_valid, out_last; logic signed [L-1:0][15:0] out_data;
  int checks = 0, failures = 0;
  int coef [NC][T];
  int x [NF][NC];

  matched_filter #(.NCH(NC), .LANES(L), .TAPS(T)) dut (.*);

  function automatic int model(int f, int c);
    longint acc = 0;
    for (int k = 0; k < T; k++) if (f - k >= 0) acc += longint'(coef[c][k]) * x[f-k][c];
    acc = acc >>> 14;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  int ob = 0, of = 0, cyc = 0, t_in = -1, t_out = -1;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && t_in < 0) t_in = cyc;
    if (!rst && out_valid) begin
      if (t_out < 0) t_out = cyc;
      for (int l = 0; l < L; l++) begin
        int c, e; logic signed [15:0] o;
        c = ob * L + l; o = out_data[l];
        e = model(of, c);
        checks++;
        if (int'(o) != e) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d ch %0d got %0d exp %0d", of, c, o, e);
        end
      end
      if (ob == G - 1) begin ob = 0; of++; end else ob++;
    end
  end

  initial begin
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < T; k++) coef[c][k] = (k == 0) ? 16384 : 0;
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NC; c++) x[f][c] = int'($urandom_range(20000)) - 10000;
    repeat (3) @(posedge clk);
    rst = 0;
    foreach (coef[c]) if (c == 5 || c == 42)
      for (int k = 0; k < T; k++) begin
        coef[c][k] = int'($urandom_range(8000)) - 4000;
        @(negedge clk); cfg_we = 1; cfg_addr = 20'((c << 5) | k); cfg_wdata = 32'(coef[c][k]);
        @(negedge clk); cfg_we = 0;
      end
    // A write to tap 31 (beyond the 30 taps) must be ignored.
    @(negedge clk); cfg_we = 1; cfg_addr = 20'((5 << 5) | 31); cfg_wdata = 32'h1234;
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < NF; f++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk); in_valid = 1; in_last = (g == G - 1);
        for (int l = 0; l < L; l++) in_data[l] = 16'(x[f][g*L+l]);
      end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (5) @(posedge clk);
    checks++; if (of != NF) begin failures++; $display("FAIL frames %0d", of); end
    checks++; if (t_out - t_in != 2) begin failures++; $display("FAIL latency %0d", t_out - t_in); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
