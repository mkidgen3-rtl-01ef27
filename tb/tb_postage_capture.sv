// tb_postage_capture: 32 channels (4 beats per frame), 4 watch slots and a
// 3-event limit. Channel c carries samples {Q = c, I = frame number}, so a
// dumped window shows exactly which frames it holds. The test checks:
// header and window of an event; a disabled slot and an unwatched channel
// give nothing; a retrigger during a capture is ignored; two slots
// triggering close together are dumped one after the other; the event
// limit; and re-arming restarts the event numbering. The write port's
// ready toggles randomly.
module tb_postage_capture;
  import mkid_pkg::*;
  localparam int NCH = 32, L = 8, G = NCH / L, NMON = 4, WIN = 127, PRE = 32, MAXE = 3;
  localparam int BASE = 32'h10000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic iq_valid = 0, iq_last = 0; iq_t [L-1:0] iq_data = '0;
  logic [L-1:0] trig_valid = '0; logic [1:0] trig_group = '0;
  logic [35:0] ts = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic mem_valid, mem_ready = 1; logic [39:0] mem_addr; logic [31:0] mem_data;
  logic [$clog2(MAXE+1)-1:0] events;
  int checks = 0, failures = 0;

  postage_capture #(.NCH(NCH), .LANES(L), .NMON(NMON), .WIN(WIN), .PRE(PRE),
                    .MAX_EVENTS(MAXE), .TS_W(36)) dut (.*);

  logic [31:0] mem [longint];
  int n_words = 0;
  always @(posedge clk) if (!rst && mem_valid && mem_ready) begin
    mem[longint'(mem_addr)] = mem_data;
    n_words++;
  end
  always @(negedge clk) mem_ready = ($urandom_range(3) != 0);

  // IQ stream: one beat per cycle, frame counter in I, channel in Q.
  int frame = 0, beat = 0;
  always @(negedge clk) if (!rst) begin
    iq_valid = 1; iq_last = (beat == G - 1);
    for (int l = 0; l < L; l++) iq_data[l] = '{q: 16'(beat * L + l), i: 16'(frame)};
    ts = 36'(frame);
  end
  always @(posedge clk) if (!rst) begin
    #1;
    if (beat == G - 1) begin beat = 0; frame++; end else beat++;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); #2; cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk); #2; cfg_we = 0;
  endtask

  // Fire a trigger on channel c at the next beat equal to b; return the
  // expected first frame of the window.
  function automatic int window_first(int c, int f, int b);
    int last;
    last = (c / L > b) ? f + (WIN - PRE) - 1 : f + (WIN - PRE);
    return last - (WIN - 1);
  endfunction
  task automatic trig(input int c, input int b, output int first, output int tsv);
    @(negedge clk);
    while (beat != b) @(negedge clk);
    #2;
    trig_group = 2'(c / L); trig_valid = '0; trig_valid[c % L] = 1'b1;
    first = window_first(c, frame, b); tsv = frame;
    @(negedge clk); #2; trig_valid = '0;
  endtask

  task automatic check_event(input int n, input int c, input int tsv, input int first);
    longint a;
    a = BASE + 512 * n;
    checks++;
    if (!mem.exists(a) || mem[a] !== {21'(tsv), 11'(c)}) begin
      failures++; $display("FAIL event %0d header %h exp chan %0d ts %0d", n, mem.exists(a) ? mem[a] : 0, c, tsv);
    end
    for (int k = 0; k < WIN; k++) begin
      checks++;
      if (!mem.exists(a + 4 * (k + 1)) || mem[a + 4 * (k + 1)] !== {16'(c), 16'(first + k)}) begin
        failures++;
        if (failures < 10) $display("FAIL event %0d sample %0d = %h exp %h", n, k,
                                    mem.exists(a + 4 * (k + 1)) ? mem[a + 4 * (k + 1)] : 0, {16'(c), 16'(first + k)});
      end
    end
  endtask

  int f1, t1, f2, t2, f3, t3, fx, tx;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    wr(0, 32'h8000_0005);       // slot 0: channel 5
    wr(1, 32'h8000_000D);       // slot 1: channel 13
    wr(2, 32'h8000_001E);       // slot 2: channel 30
    wr(3, 32'h0000_0007);       // slot 3: channel 7, disabled
    wr(16, BASE);
    wr(17, 1);
    while (frame < 200) @(negedge clk);
    // Event 0 on channel 5; channel 7 (disabled) and 6 (unwatched) fire too.
    trig(5, 2, f1, t1);
    trig(7, 0, fx, tx);
    trig(6, 0, fx, tx);
    while (frame < 230) @(negedge clk);
    trig(5, 1, fx, tx);         // retrigger during the capture: ignored
    while (frame < 400) @(negedge clk);
    checks++; if (events != 1) begin failures++; $display("FAIL events %0d after first", events); end
    check_event(0, 5, t1, f1);
    checks++; if (n_words != 128) begin failures++; $display("FAIL %0d words written", n_words); end
    // Events 1 and 2: channels 13 and 30 two beats apart.
    trig(13, 1, f2, t2);
    trig(30, 3, f3, t3);
    while (frame < 700) @(negedge clk);
    checks++; if (events != 3) begin failures++; $display("FAIL events %0d", events); end
    check_event(1, 13, t2, f2);
    check_event(2, 30, t3, f3);
    // Limit reached: ignored.
    trig(5, 0, fx, tx);
    while (frame < 900) @(negedge clk);
    checks++; if (events != 3 || n_words != 3 * 128) begin failures++; $display("FAIL limit events %0d words %0d", events, n_words); end
    // Re-arm: numbering restarts at event 0.
    wr(17, 1);
    checks++; if (events != 0) failures++;
    trig(13, 2, f1, t1);
    while (frame < 1150) @(negedge clk);
    checks++; if (events != 1) failures++;
    check_event(0, 13, t1, f1);
    $display("words %0d events %0d", n_words, events);
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
