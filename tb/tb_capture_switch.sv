// tb_capture_switch: three sources with random valid patterns, each
// carrying a running word counter tagged with its source number. Captures
// of random length from each source are checked for the right source,
// contiguous words, exact length, m_last on the final word only and the busy
// flag; a start while busy and a start with an invalid source are ignored.
module tb_capture_switch;
  localparam int W = 16, N = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [N-1:0] s_valid = '0; logic [N-1:0][W-1:0] s_data = '0;
  logic [1:0] sel = 0; logic start = 0; logic [31:0] len = 0;
  logic m_valid, m_last; logic [W-1:0] m_data; logic busy;
  int checks = 0, failures = 0;

  capture_switch #(.W(W), .N_IN(N)) dut (.*);

  int cnt [N] = '{0, 0, 0};
  always @(negedge clk) if (!rst) begin
    for (int s = 0; s < N; s++) begin
      if (s_valid[s]) cnt[s]++;
      s_valid[s] = ($urandom_range(1) == 0);
      s_data[s]  = {4'(s), 12'(cnt[s])};
    end
  end

  int got = 0, got_last = 0, src = -1, want = 0; logic [11:0] prev;
  always @(posedge clk) if (!rst && m_valid) begin
    checks++;
    if (int'(m_data[15:12]) != src || (got > 0 && m_data[11:0] != prev + 1'b1)) begin
      failures++; $display("FAIL word %h src %0d", m_data, src);
    end
    prev = m_data[11:0];
    got++;
    if (m_last) begin
      got_last++;
      checks++;
      if (got != want) begin failures++; $display("FAIL m_last on word %0d of %0d", got, want); end
    end
  end

  task automatic capture(input int s, input int n);
    got = 0; got_last = 0; src = s; want = n;
    @(negedge clk); sel = 2'(s); len = n; start = 1;
    @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    @(negedge clk); sel = 2'((s + 1) % N); len = 5; start = 1;   // ignored: busy
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (got != n || got_last != 1) begin failures++; $display("FAIL got %0d last %0d exp %0d", got, got_last, n); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int k = 0; k < 12; k++) capture(k % N, 1 + $urandom_range(40));
    // Invalid source 3: no capture.
    @(negedge clk); sel = 3; len = 4; start = 1;
    @(negedge clk); start = 0;
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
