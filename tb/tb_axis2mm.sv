// tb_axis2mm: 32-bit words, bursts of 4. A queue stands in for the FIFO
// (words trickle in at random), and an AXI4 slave model with random
// AW/W ready and response delay stores each beat at the address of its
// burst. Checks: every word lands at base + 4 * index, burst lengths and
// wlast positions, no burst starts before its words are buffered, done at
// the end, no error; then a capture whose response is SLVERR must set err.
module tb_axis2mm;
  localparam int DW = 32, AW = 32, BURST = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic go_toggle = 0; logic [AW-1:0] base = '0; logic [31:0] total = '0;
  logic f_valid = 0, f_last = 0, f_ready; logic [DW-1:0] f_data = '0; logic [6:0] f_count = '0;
  logic m_axi_awvalid, m_axi_awready = 0; logic [AW-1:0] m_axi_awaddr; logic [7:0] m_axi_awlen;
  logic [2:0] m_axi_awsize; logic [1:0] m_axi_awburst;
  logic m_axi_wvalid, m_axi_wready = 0, m_axi_wlast; logic [DW-1:0] m_axi_wdata; logic [DW/8-1:0] m_axi_wstrb;
  logic m_axi_bvalid = 0, m_axi_bready; logic [1:0] m_axi_bresp = '0;
  logic done, err;
  int checks = 0, failures = 0;

  axis2mm #(.DW(DW), .AW(AW), .BURST(BURST), .CNT_W(7)) dut (.*);

  // FIFO stand-in.
  logic [DW:0] fq [$];
  function automatic void upd();
    f_valid = fq.size() > 0;
    f_data  = f_valid ? fq[0][DW-1:0] : '0;
    f_last  = f_valid ? fq[0][DW] : 1'b0;
    f_count = 7'(fq.size() > 127 ? 127 : fq.size());
  endfunction

  // AXI slave model.
  logic [31:0] mem [longint];
  int aq_addr [$], aq_len [$];
  int cur_addr = 0, cur_left = 0, cur_len = 0, bursts = 0, pending_b = 0;
  bit slverr = 0;
  always @(negedge clk) begin
    m_axi_awready = ($urandom_range(1) == 0);
    m_axi_wready  = ($urandom_range(3) != 0);
  end
  always @(posedge clk) if (!rst && f_valid && f_ready) begin
    #1; void'(fq.pop_front()); upd();
  end
  always @(posedge clk) if (!rst) begin
    if (m_axi_awvalid && m_axi_awready) begin
      aq_addr.push_back(int'(m_axi_awaddr)); aq_len.push_back(int'(m_axi_awlen) + 1);
      checks++;
      if (m_axi_awburst != 2'b01 || m_axi_awsize != 3'd2 || m_axi_awlen >= BURST) begin
        failures++; $display("FAIL AW len %0d", m_axi_awlen);
      end
    end
    if (m_axi_wvalid && m_axi_wready) begin
      if (cur_left == 0) begin
        if (aq_addr.size() == 0) begin failures++; $display("FAIL W before AW"); end
        else begin cur_addr = aq_addr.pop_front(); cur_left = aq_len.pop_front(); cur_len = cur_left; end
      end
      mem[cur_addr] = m_axi_wdata;
      cur_addr += 4; cur_left--;
      checks++;
      if (m_axi_wlast != (cur_left == 0) || m_axi_wstrb != '1) begin failures++; $display("FAIL wlast"); end
      if (cur_left == 0) begin pending_b++; bursts++; end
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      if (pending_b > 0 && !m_axi_bvalid && $urandom_range(2) == 0) begin
        m_axi_bvalid = 1; m_axi_bresp = slverr ? 2'b10 : 2'b00;
      end else if (m_axi_bvalid) begin
        // held until the cycle after bready
      end
    end
  end
  always @(posedge clk) if (m_axi_bvalid && m_axi_bready) begin
    #1; m_axi_bvalid = 0; pending_b--;
  end

  task automatic capture(input int b, input int n, input int tag);
    @(negedge clk); base = AW'(b); total = n; go_toggle = ~go_toggle;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      while ($urandom_range(2) == 0) @(negedge clk);
      fq.push_back({k == n - 1, 32'(tag * 65536 + k)}); upd();
    end
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int k = 0; k < n; k++) begin
      checks++;
      if (!mem.exists(b + 4 * k) || mem[b + 4 * k] != 32'(tag * 65536 + k)) begin
        failures++; $display("FAIL word %0d of capture %0d", k, tag);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    capture(32'h1000, 10, 1);
    checks++; if (err || bursts != 3) begin failures++; $display("FAIL err %b bursts %0d", err, bursts); end
    capture(32'h8000, 33, 2);
    checks++; if (err || bursts != 3 + 9) begin failures++; $display("FAIL err %b bursts %0d", err, bursts); end
    slverr = 1;
    capture(32'h4000, 4, 3);
    checks++; if (!err) begin failures++; $display("FAIL SLVERR not reported"); end
    $display("bursts %0d", bursts);
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
