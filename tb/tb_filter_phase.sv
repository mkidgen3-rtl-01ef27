// tb_filter_phase: 16 groups of 16-bit beats, random input gaps, random
// keep masks. A model pairs kept beats into 32-bit words (earlier beat in
// the low half); the half-word clear command is exercised with an odd
// number of kept beats pending.
module tb_filter_phase;
  localparam int G = 16, IW = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; logic [IW-1:0] in_data = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic out_valid; logic [2*IW-1:0] out_data;
  int checks = 0, failures = 0;

  filter_phase #(.GROUPS(G), .IW(IW)) dut (.*);

  logic [2*IW-1:0] expq [$];
  logic [IW-1:0] m_low; bit m_half = 0;
  int n_out = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    logic [2*IW-1:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = expq.pop_front();
      if (out_data !== e) begin failures++; $display("FAIL out %h exp %h", out_data, e); end
    end
    n_out++;
  end

  logic [31:0] mask = '1;
  int frame = 0;
  task automatic run_frames(input int nf);
    for (int f = 0; f < nf; f++) begin
      for (int g = 0; g < G; g++) begin
        while ($urandom_range(2) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_last = (g == G - 1); in_data = {8'(frame), 8'(g)};
        if (mask[g]) begin
          if (!m_half) begin m_low = in_data; m_half = 1; end
          else begin expq.push_back({in_data, m_low}); m_half = 0; end
        end
      end
      frame++;
    end
    @(negedge clk); in_valid = 0;
  endtask
  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    run_frames(2);
    for (int k = 0; k < 8; k++) begin
      mask = $urandom;
      wr(0, mask);
      run_frames(2);
      if (k % 2 == 1) begin wr(1, 0); m_half = 0; end   // clear
    end
    // Exactly three kept groups per frame: a half word is left over.
    mask = 32'h0000_0111; wr(0, mask);
    run_frames(1);
    checks++; if (!m_half) failures++;
    wr(1, 0); m_half = 0;
    mask = 32'h0000_0003; wr(0, mask);
    run_frames(2);
    repeat (5) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("outputs %0d", n_out);
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
