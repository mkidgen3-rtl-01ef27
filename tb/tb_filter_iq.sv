// tb_filter_iq: 16 groups of 32-bit beats with random gaps in the input.
// For several random keep masks (plus the all-kept default) a model
// predicts the kept beats, in order, and which one carries out_last;
// out_last must never be raised without out_valid.
module tb_filter_iq;
  localparam int G = 16, W = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; logic [W-1:0] in_data = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic out_valid, out_last; logic [W-1:0] out_data;
  int checks = 0, failures = 0;

  filter_iq #(.GROUPS(G), .W(W)) dut (.*);

  logic [W:0] expq [$];
  int n_out = 0, n_last = 0;
  always @(posedge clk) if (!rst && out_last && !out_valid) begin
    checks++; failures++; $display("FAIL out_last without out_valid");
  end
  always @(posedge clk) if (!rst && out_valid) begin
    logic [W:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      e = expq.pop_front();
      if ({out_last, out_data} !== e) begin failures++; $display("FAIL out %h last %b exp %h", out_data, out_last, e); end
    end
    n_out++; if (out_last) n_last++;
  end

  logic [31:0] mask = '1;
  int frame = 0;
  task automatic run_frames(input int nf);
    for (int f = 0; f < nf; f++) begin
      for (int g = 0; g < G; g++) begin
        while ($urandom_range(2) == 0) begin @(negedge clk); in_valid = 0; end
        @(negedge clk);
        in_valid = 1; in_last = (g == G - 1); in_data = {16'(frame), 16'(g)};
        if (mask[g]) expq.push_back({in_last, in_data});
      end
      frame++;
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    run_frames(3);
    for (int k = 0; k < 6; k++) begin
      mask = (k == 5) ? 32'h0000_8001 : $urandom;
      @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = mask;
      @(negedge clk); cfg_we = 0;
      run_frames(3);
    end
    repeat (5) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    checks++; if (n_last == 0) failures++;
    $display("outputs %0d last %0d", n_out, n_last);
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
