// tb_dac_replay: fills a small waveform table, runs the replay and checks
// every DAC beat against the table contents, the one-cycle start latency,
// wrap-around at the full table and at a programmed loop length.
module tb_dac_replay;
  import mkid_pkg::*;
  localparam int SAMPLES = 64, SPC = 8, ROWS = SAMPLES / SPC;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic signed [SPC-1:0][15:0] dac_i, dac_q;
  logic dac_valid;
  int checks = 0, failures = 0;

  dac_replay #(.SAMPLES(SAMPLES), .SPC(SPC)) dut (.*);

  function automatic logic [31:0] sample(int k);
    return {16'(k * 3 - 100), 16'(k * 7 + 1)};
  endfunction

  task automatic wr(input logic [19:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic check_rows(input int nbeats, input int len);
    int row = 0;
    for (int n = 0; n < nbeats; n++) begin
      @(posedge clk); #1;
      checks++;
      if (!dac_valid) begin failures++; $display("FAIL beat %0d not valid", n); end
      for (int b = 0; b < SPC; b++) begin
        logic [31:0] e;
        e = sample(row * SPC + b);
        if (dac_i[b] !== e[15:0] || dac_q[b] !== e[31:16]) begin
          failures++;
          $display("FAIL beat %0d lane %0d got %h/%h exp %h", n, b, dac_q[b], dac_i[b], e);
        end
      end
      row = (row + 1) % len;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < SAMPLES; k++) wr(20'(k), sample(k));
    checks++; if (dac_valid) failures++;
    // Start: cfg_we sampled at edge E, valid and row 0 at edge E+1.
    @(negedge clk); cfg_we = 1; cfg_addr = 20'h80000; cfg_wdata = 1;
    @(posedge clk); #1; cfg_we = 0;
    checks++; if (dac_valid) begin failures++; $display("FAIL valid too early"); end
    check_rows(3 * ROWS + 2, ROWS);
    // Loop length 3 beats.
    wr(20'h80000, 0);
    wr(20'h80001, 3);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'h80000; cfg_wdata = 1;
    @(posedge clk); #1; cfg_we = 0;
    check_rows(10, 3);
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
