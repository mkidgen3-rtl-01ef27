// tb_bin_select: full-size bin selection (4096 bins, 2048 channels).
// Programs a random channel map with many channels on one bin, feeds
// frames whose bins carry {frame, bin} tags, and checks every output
// channel of every frame against the map, plus the one-frame delay.
module tb_bin_select;
  import mkid_pkg::*;
  localparam int NB = 4096, NC = 2048, IL = 16, OL = 8, ROWS = NB / IL;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; iq_t [IL-1:0] in_data = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic out_valid, out_last; iq_t [OL-1:0] out_data;
  int checks = 0, failures = 0;
  int map [NC];

  bin_select #(.NBINS(NB), .NCH(NC), .IN_LANES(IL), .OUT_LANES(OL)) dut (.*);

  // Output monitor.
  int ob = 0, of = 0, dup_seen = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    for (int l = 0; l < OL; l++) begin
      int c; c = ob * OL + l;
      checks++;
      if (out_data[l].i !== 16'(map[c]) || out_data[l].q !== 16'(of)) begin
        failures++;
        if (failures < 10) $display("FAIL frame %0d ch %0d got bin %0d frame %0d exp bin %0d", of, c, out_data[l].i, out_data[l].q, map[c]);
      end
    end
    checks++;
    if (out_last !== (ob == ROWS - 1)) failures++;
    if (ob == ROWS - 1) begin ob = 0; of++; end else ob++;
  end

  initial begin
    for (int c = 0; c < NC; c++) map[c] = 2 * c;     // reset default
    repeat (3) @(posedge clk);
    rst = 0;
    // Frame 0 runs with the default map; program the new map afterwards.
    fork
      begin
        for (int f = 0; f < 5; f++) begin
          if (f == 2) begin
            // program between frames (input pauses)
            for (int c = 0; c < NC; c++) begin
              int b;
              b = (c < 40) ? 1234 : int'($urandom_range(NB - 1));
              @(negedge clk); cfg_we = 1; cfg_addr = 20'(c); cfg_wdata = 32'(b);
              @(negedge clk); cfg_we = 0;
              map[c] = b;
            end
          end
          for (int r = 0; r < ROWS; r++) begin
            @(negedge clk);
            in_valid = 1; in_last = (r == ROWS - 1);
            for (int k = 0; k < IL; k++) in_data[k] = '{q: 16'(f), i: 16'(r * IL + k)};
          end
          @(negedge clk); in_valid = 0; in_last = 0;
          // wait for the previous frame's output to drain before reprogramming
          if (f == 1) repeat (5) @(negedge clk);
        end
      end
    join
    repeat (10) @(posedge clk);
    // Frames 0..3 come out (frame 4 stays cached until a 6th frame arrives).
    checks++;
    if (of != 4) begin failures++; $display("FAIL output frames %0d", of); end
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
