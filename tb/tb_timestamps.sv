// tb_timestamps: 8 clocks per microsecond. Checks the free-running count
// (one increment per 8 cycles, us_tick period), that PPS is ignored in
// free-running mode, that in PPS mode an edge loads second * 10^6 three
// cycles after the pin rises, and the direct 36-bit load with wrap-around.
module tb_timestamps;
  localparam int CPU = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic pps = 0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic [35:0] ts; logic us_tick, pps_seen;
  int checks = 0, failures = 0;

  timestamps #(.TS_W(36), .CLK_PER_US(CPU)) dut (.*);

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  int ticks = 0;
  always @(posedge clk) if (!rst && us_tick) ticks++;

  initial begin
    longint t0;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk); t0 = ts;
    repeat (CPU * 100) @(negedge clk);
    expect_eq("free-run 100 us", ts - t0, 100);
    expect_eq("ticks", ticks, 100);
    // PPS ignored in free-running mode.
    wr(1, 32'd1700000000);
    t0 = ts;
    @(negedge clk); pps = 1; repeat (4) @(negedge clk); pps = 0;
    expect_eq("pps ignored", ts - t0 <= 1, 1);
    expect_eq("pps_seen low", pps_seen, 0);
    // PPS mode.
    wr(0, 1);
    wr(1, 32'd1700000000);
    @(negedge clk); pps = 1;
    @(negedge clk); @(negedge clk);
    expect_eq("not yet", ts == ((64'd1700000000 * 64'd1000000) & 64'hF_FFFF_FFFF), 0);
    @(negedge clk);
    expect_eq("pps load", ts, (64'd1700000000 * 64'd1000000) & 64'hF_FFFF_FFFF);
    repeat (CPU * 5) @(negedge clk);
    expect_eq("after pps", ts, ((64'd1700000000 * 64'd1000000) & 64'hF_FFFF_FFFF) + 5);
    pps = 0;
    expect_eq("pps_seen", pps_seen, 1);
    // Direct load near wrap.
    wr(2, 32'hFFFF_FFFE);
    wr(3, 32'hF);
    expect_eq("direct load", ts, 64'hF_FFFF_FFFE);
    repeat (CPU * 3) @(negedge clk);
    expect_eq("wrap", ts, 1);
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
