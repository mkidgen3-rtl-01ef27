// tb_capture_fifo: 16-bit words written on a 10-unit clock, 32-bit entries
// read on an unrelated 18-unit clock with random ready. A model pairs the
// words (first word low, a last word closing its entry early with a zero
// upper half) and every entry read must match, in order. Finally the
// reader stops and the writer overfills the FIFO: overflow must be set and
// r_count must report a full FIFO.
module tb_capture_fifo;
  localparam int IW = 16, DEPTH = 8;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #5 wclk = ~wclk;
  always #9 rclk = ~rclk;
  logic w_valid = 0, w_last = 0; logic [IW-1:0] w_data = '0;
  logic overflow, r_ready = 0, r_valid, r_last; logic [2*IW-1:0] r_data;
  logic [$clog2(DEPTH):0] r_count;
  int checks = 0, failures = 0;

  capture_fifo #(.IW(IW), .DEPTH(DEPTH)) dut (.*);

  logic [2*IW:0] expq [$];
  logic [IW-1:0] m_low; bit m_half = 0;
  bit reading = 1;
  int n_read = 0, n_last = 0;

  always @(negedge rclk) r_ready = reading && ($urandom_range(2) != 0);
  always @(posedge rclk) if (!rrst && r_valid && r_ready) begin
    logic [2*IW:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected entry"); end
    else begin
      e = expq.pop_front();
      if ({r_last, r_data} !== e) begin failures++; $display("FAIL entry %h last %b exp %h", r_data, r_last, e); end
    end
    n_read++; if (r_last) n_last++;
  end

  initial begin
    repeat (4) @(posedge rclk);
    wrst = 0; rrst = 0;
    for (int k = 0; k < 600; k++) begin
      @(negedge wclk);
      w_valid = ($urandom_range(1) == 0);
      w_last  = w_valid && ($urandom_range(6) == 0);
      w_data  = 16'(k);
      if (w_valid) begin
        if (!m_half && !w_last) begin m_low = w_data; m_half = 1; end
        else if (!m_half) expq.push_back({1'b1, 16'h0, w_data});
        else begin expq.push_back({w_last, w_data, m_low}); m_half = 0; end
      end
    end
    @(negedge wclk); w_valid = 0;
    repeat (60) @(posedge rclk);
    checks++; if (expq.size() > 0) begin failures++; $display("FAIL %0d entries not read", expq.size()); end
    checks++; if (overflow) begin failures++; $display("FAIL overflow in normal run"); end
    checks++; if (n_last == 0) failures++;
    // Overfill with the reader stopped.
    reading = 0;
    repeat (3) @(posedge rclk);
    for (int k = 0; k < 4 * DEPTH; k++) begin
      @(negedge wclk); w_valid = 1; w_last = 0; w_data = 16'(k);
    end
    @(negedge wclk); w_valid = 0;
    repeat (10) @(posedge rclk);
    checks++; if (!overflow) begin failures++; $display("FAIL no overflow"); end
    checks++; if (r_count != DEPTH) begin failures++; $display("FAIL r_count %0d", r_count); end
    $display("entries read %0d", n_read);
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
