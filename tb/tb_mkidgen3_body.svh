// Shared body of the end-to-end testbenches of mkidgen3_top.
//
// The including module defines FULL, N_CH, N_BIN, CLK_PER_US and
// PHOT_BUF_BYTES, declares nothing else, includes this file and then
// instantiates the top as `dut` with .* connections.
//
// Stimulus: the OPFB output is generated directly. Channels 3, 17 and 40
// (bins 6, 34 and 80 under the default map) carry a constant tone of
// amplitude A at 0 Hz, i.e. IQ = (A, 0); every PERF microseconds each gets
// a photon-like pulse, its phase stepped to -1.5 rad for DUR microseconds.
// Channel 50 is remapped onto bin 34, so it sees channel 17's pulses too.
// A processor model drives the AXI4-Lite port; models of the photon and
// postage memory ports and of the DRAM AXI4 slave store what is written.
//
// Sequence and checks:
//  * PPS: the next GPS second is set to 7 and a PPS pulse given; the time
//    read back must lie just after 7e6 us.
//  * DAC: 16 table samples, loop length 2 beats; the DAC outputs must
//    repeat rows 0,1,0,1,... with sample k = row*8 + lane.
//  * Photons: every photon must come from a pulsed channel with the
//    expected minimum phase (-1.5 rad; -1.125 rad on channel 40, whose
//    matched filter is programmed to gain 0.75), and successive photons of
//    a channel must be exactly PERF us apart. Channel 50 must report each
//    pulse at the same time as channel 17 (bin duplication).
//  * Buffers: swaps on a full buffer (reduced size only: at the default
//    800 KiB this needs 102400 photons), swaps on the time interval, and
//    photons dropped while the processor holds both buffers; photons
//    written plus the dropped count read over AXI4-Lite must equal the
//    number of pulses sent (one photon per pulse and channel).
//  * Postage stamp: one event on channel 3 whose window holds both
//    baseline and pulse samples and whose header names channel 3.
//  * Calibration capture of each source (phase, IQ, raw ADC) to DRAM; the
//    ADC capture is checked word by word.
// Each mechanism is counted and one that never happened is a failure.

  import mkid_pkg::*;
  localparam int FB   = N_BIN / 16;           // beats per OPFB frame
  localparam int CAP  = PHOT_BUF_BYTES / 8;   // photons per buffer
  localparam int PERF = 50, DUR = 10;         // pulse period and length, us
  localparam int A    = 8000;
  localparam int NPC  = 3;
  localparam int PCH [NPC] = '{3, 17, 40};
  localparam int POFF [NPC] = '{0, 13, 29};

  logic clk = 0, rst = 1, clk_mem = 0, rst_mem = 1;
  always #5 clk = ~clk;
  always #10 clk_mem = ~clk_mem;

  logic s_axil_awvalid = 0, s_axil_awready; logic [31:0] s_axil_awaddr = '0;
  logic s_axil_wvalid = 0, s_axil_wready;   logic [31:0] s_axil_wdata = '0;
  logic s_axil_bvalid, s_axil_bready = 0;   logic [1:0] s_axil_bresp;
  logic s_axil_arvalid = 0, s_axil_arready; logic [31:0] s_axil_araddr = '0;
  logic s_axil_rvalid, s_axil_rready = 0;   logic [31:0] s_axil_rdata; logic [1:0] s_axil_rresp;
  logic pps = 0;
  logic adc_valid = 0; logic signed [7:0][15:0] adc_i = '0, adc_q = '0;
  logic dac_valid; logic signed [7:0][15:0] dac_i, dac_q;
  logic opfb_valid = 0, opfb_last = 0; iq_t [15:0] opfb_data = '0;
  logic phot_mem_valid, phot_mem_ready = 1; logic [39:0] phot_mem_addr; photon_t phot_mem_data;
  logic phot_swap_valid, phot_swap_buf;
  logic post_mem_valid, post_mem_ready = 1; logic [39:0] post_mem_addr; logic [31:0] post_mem_data;
  logic m_axi_awvalid, m_axi_awready = 0; logic [31:0] m_axi_awaddr; logic [7:0] m_axi_awlen;
  logic [2:0] m_axi_awsize; logic [1:0] m_axi_awburst;
  logic m_axi_wvalid, m_axi_wready = 0, m_axi_wlast; logic [511:0] m_axi_wdata; logic [63:0] m_axi_wstrb;
  logic m_axi_bvalid = 0, m_axi_bready; logic [1:0] m_axi_bresp = '0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- OPFB stimulus ----------------
  int beat = 0, coarse = 0;
  bit pulses_on = 0;
  int n_trig = 0;                         // photons the pulses should produce
  int pulse_i, pulse_q;
  initial begin
    pulse_i = int'($rtoi(A * $cos(-1.5)));
    pulse_q = int'($rtoi(A * $sin(-1.5)));
  end
  always @(negedge clk) if (!rst) begin
    opfb_valid = 1;
    opfb_last  = (beat == FB - 1);
    for (int l = 0; l < 16; l++) opfb_data[l] = '0;
    for (int p = 0; p < NPC; p++) begin
      int b;
      b = 2 * PCH[p];
      if (b / 16 == beat) begin
        // every pulse should give one photon (two on bin 34: channels 17 and 50)
        if (pulses_on && coarse % 2 == 0 && ((coarse / 2 + POFF[p]) % PERF) == 0)
          n_trig += (PCH[p] == 17) ? 2 : 1;
        if (pulses_on && ((coarse / 2 + POFF[p]) % PERF) < DUR)
          opfb_data[b % 16] = '{q: 16'(pulse_q), i: 16'(pulse_i)};
        else
          opfb_data[b % 16] = '{q: 16'(0), i: 16'(A)};
      end
    end
  end
  always @(posedge clk) if (!rst) begin
    #1;
    if (beat == FB - 1) begin beat = 0; coarse++; end else beat++;
  end

  // Raw ADC samples: a running count on I, its complement on Q.
  int adc_cnt = 0;
  always @(negedge clk) if (!rst) begin
    adc_valid = 1;
    for (int k = 0; k < 8; k++) begin
      adc_i[k] = 16'(adc_cnt * 8 + k);
      adc_q[k] = ~16'(adc_cnt * 8 + k);
    end
    adc_cnt++;
  end

  // ---------------- processor model: AXI4-Lite ----------------
  task automatic axil_write(input int blk, input int word, input logic [31:0] d);
    @(negedge clk);
    s_axil_awvalid = 1; s_axil_awaddr = 32'(blk) << 22 | 32'(word) << 2;
    s_axil_wvalid = 1; s_axil_wdata = d; s_axil_bready = 1;
    @(posedge clk); while (!s_axil_awready) @(posedge clk);
    @(negedge clk); s_axil_awvalid = 0; s_axil_wvalid = 0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk); s_axil_bready = 0;
  endtask
  task automatic axil_read(input int word, output logic [31:0] d);
    @(negedge clk);
    s_axil_arvalid = 1; s_axil_araddr = 32'(word) << 2; s_axil_rready = 1;
    @(posedge clk); while (!s_axil_arready) @(posedge clk);
    @(negedge clk); s_axil_arvalid = 0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk); s_axil_rready = 0;
  endtask

  // ---------------- photon memory port ----------------
  int n_phot = 0, n_phot_ch [64];
  longint last_ts [64];
  int n_spacing_ok = 0, n_dup = 0;
  longint ts17 [$];
  int swaps_full = 0, swaps_interval = 0, buf_count [2] = '{0, 0};
  int n_in_buf [2] = '{0, 0};            // records written into each buffer
  int rel_q [$];
  bit release_en = 1;
  initial for (int c = 0; c < 64; c++) begin n_phot_ch[c] = 0; last_ts[c] = -1; end

  always @(negedge clk) phot_mem_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (!rst && phot_mem_valid && phot_mem_ready) begin
    int c; longint t; logic signed [15:0] ph; int exp_ph;
    c = int'(phot_mem_data.chan); t = longint'(phot_mem_data.ts); ph = phot_mem_data.phase;
    n_phot++;
    n_in_buf[phot_mem_addr >= 40'h100000]++;
    check(c == 3 || c == 17 || c == 40 || c == 50, $sformatf("photon on channel %0d", c));
    if (c < 64) begin
      exp_ph = (c == 40) ? -9216 : -12288;
      check(int'(ph) > exp_ph - 600 && int'(ph) < exp_ph + 600,
            $sformatf("photon phase %0d on channel %0d", ph, c));
      if (last_ts[c] >= 0 && t - last_ts[c] == PERF) n_spacing_ok++;
      else if (last_ts[c] >= 0 && !(t - last_ts[c] > PERF && (t - last_ts[c]) % PERF == 0))
        check(0, $sformatf("photon spacing %0d on channel %0d", t - last_ts[c], c));
      last_ts[c] = t;
      n_phot_ch[c]++;
      check(t >= 64'd7000000, "photon time before the PPS second");
      if (c == 17) ts17.push_back(t);
      if (c == 50) foreach (ts17[k]) if (ts17[k] == t) n_dup++;
    end
  end
  always @(posedge clk) if (!rst && phot_swap_valid) begin
    if (n_in_buf[phot_swap_buf] == CAP) swaps_full++; else swaps_interval++;
    n_in_buf[phot_swap_buf] = 0;
    rel_q.push_back(int'(phot_swap_buf));
  end


  // ---------------- postage memory port ----------------
  logic [31:0] post_mem [longint];
  int n_post_words = 0;
  always @(negedge clk) post_mem_ready = ($urandom_range(3) != 0);
  always @(posedge clk) if (!rst && post_mem_valid && post_mem_ready) begin
    post_mem[longint'(post_mem_addr)] = post_mem_data;
    n_post_words++;
  end

  // ---------------- DRAM AXI4 slave (clk_mem) ----------------
  logic [511:0] dram [longint];
  int aw_addr [$], aw_len [$];
  int w_addr = 0, w_left = 0, b_pending = 0;
  always @(negedge clk_mem) begin
    m_axi_awready = ($urandom_range(1) == 0);
    m_axi_wready  = ($urandom_range(7) != 0);
    if (m_axi_bvalid == 0 && b_pending > 0) begin m_axi_bvalid = 1; m_axi_bresp = 2'b00; end
  end
  always @(posedge clk_mem) if (!rst_mem) begin
    if (m_axi_awvalid && m_axi_awready) begin aw_addr.push_back(int'(m_axi_awaddr)); aw_len.push_back(int'(m_axi_awlen) + 1); end
    if (m_axi_wvalid && m_axi_wready) begin
      if (w_left == 0) begin w_addr = aw_addr.pop_front(); w_left = aw_len.pop_front(); end
      dram[longint'(w_addr)] = m_axi_wdata;
      w_addr += 64; w_left--;
      if (w_left == 0) b_pending++;
    end
    if (m_axi_bvalid && m_axi_bready) begin b_pending--; #1 m_axi_bvalid = 0; end
  end

  // ---------------- DAC monitor ----------------
  int dac_rows = 0, dac_wraps = 0, dac_bad = 0; logic signed [15:0] dac_prev = 0;
  always @(posedge clk) if (!rst && dac_valid) begin
    for (int j = 0; j < 8; j++)
      if (dac_i[j] != dac_i[0] + 16'(j) || dac_q[j] != ~(dac_i[0] + 16'(j))) dac_bad++;
    if (!(dac_i[0] == 0 || dac_i[0] == 8)) dac_bad++;
    if (dac_rows > 0 && dac_i[0] == 0 && dac_prev == 8) dac_wraps++;
    dac_prev = dac_i[0];
    dac_rows++;
  end

  // ---------------- helpers ----------------
  task automatic wait_us(input int n);
    for (int k = 0; k < n * CLK_PER_US; k++) begin
      @(negedge clk);
      if (release_en && rel_q.size() > 0) axil_write(BLK_PHOT, 4, rel_q.pop_front());
    end
  endtask

  // Switch the pulses on or off only between pulses (fine sample 12 of
  // the period lies outside all three pulse windows).
  task automatic set_pulses(input bit on);
    while ((coarse / 2) % PERF != 12) @(negedge clk);
    pulses_on = on;
  endtask

  int caps_done = 0;
  task automatic capture(input int sel, input int len, input int base);
    logic [31:0] st;
    axil_write(BLK_CAP, 0, sel);
    axil_write(BLK_CAP, 1, len);
    axil_write(BLK_CAP, 3, base);
    axil_write(BLK_CAP, 2, 1);
    wait_us(2);
    for (int k = 0; k < 400; k++) begin
      axil_read(3, st);
      if (st[1] && !st[0]) break;
      wait_us(1);
    end
    check(st[1] && !st[0] && !st[2] && !st[3], $sformatf("capture of source %0d: status %h", sel, st));
    if (st[1] && !st[2]) caps_done++;
  endtask

  initial begin
    logic [31:0] st, st_hi, drops;
    longint t;
    int n_base, n_pulse;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 0; rst_mem = 0;
    repeat (4) @(negedge clk);

    // PPS alignment.
    axil_write(BLK_TIME, 1, 7);
    axil_write(BLK_TIME, 0, 1);
    @(negedge clk); pps = 1; repeat (20) @(negedge clk); pps = 0;
    wait_us(3);
    axil_read(4, st); axil_read(5, st_hi);
    t = {st_hi[3:0], st};
    check(t >= 64'd7000000 && t < 64'd7000010, $sformatf("time after PPS %0d", t));
    axil_read(3, st);
    check(st[4], "pps_seen");

    // DAC table, loop of 2 beats.
    for (int k = 0; k < 16; k++) axil_write(BLK_DAC, k, {~16'(k), 16'(k)});
    axil_write(BLK_DAC, 32'h80001, 2);
    axil_write(BLK_DAC, 32'h80000, 1);

    // Channel setup.
    axil_write(BLK_BINSEL, 50, 34);
    axil_write(BLK_MF, 40 * 32, 12288);
    foreach (PCH[p]) axil_write(BLK_TRIG, PCH[p], {16'd0, 8'd20, 8'(-48)});
    axil_write(BLK_TRIG, 50, {16'd0, 8'd20, 8'(-48)});
    axil_write(BLK_PHOT, 2, 32'h0);
    axil_write(BLK_PHOT, 3, 32'h100000);
    axil_write(BLK_PHOT, 0, 1);
    axil_write(BLK_POST, 0, 32'h8000_0003);
    axil_write(BLK_POST, 16, 32'h40000);
    axil_write(BLK_POST, 17, 1);
    axil_write(BLK_CAP, 32, 32'h1);            // IQ capture: group 0 only
    for (int k = 1; k < 8; k++) axil_write(BLK_CAP, 32 + k, 0);
    wait_us(40);                               // filters settle

    // Phase A: photons, released normally; captures run meanwhile.
    set_pulses(1);
    capture(2, 64, 32'h10000);
    capture(0, 32, 32'h20000);
    capture(1, 8, 32'h30000);
    wait_us(FULL ? 150 : 400);

    // Phase B: swap on the time interval.
    axil_write(BLK_PHOT, 1, 60);
    wait_us(300);

    // Phase C: processor holds the buffers: photons are dropped.
    release_en = 0;
    wait_us(200);
    release_en = 1;
    axil_write(BLK_PHOT, 1, 1000000);
    wait_us(100);
    axil_read(0, drops);
    set_pulses(0);
    wait_us(40);

    // ---- end checks ----
    check(dac_bad == 0 && dac_wraps >= 3, $sformatf("DAC loop: %0d bad rows, %0d wraps", dac_bad, dac_wraps));
    check(n_phot + int'(drops) == n_trig, $sformatf("photons written %0d + dropped %0d != pulses %0d", n_phot, drops, n_trig));
    check(n_spacing_ok > 0, "no regularly spaced photons");
    check(n_dup > 0, $sformatf("bin duplication: %0d coincident photons", n_dup));
    check(n_phot_ch[3] > 0 && n_phot_ch[17] > 0 && n_phot_ch[40] > 0 && n_phot_ch[50] > 0, "a pulsed channel gave no photon");
    // Postage stamp.
    check(n_post_words >= 128, $sformatf("postage words %0d", n_post_words));
    if (post_mem.exists(32'h40000)) begin
      check(post_mem[32'h40000][10:0] == 11'd3, "postage header channel");
      n_base = 0; n_pulse = 0;
      for (int k = 1; k < 128; k++) if (post_mem.exists(32'h40000 + 4 * k)) begin
        logic signed [15:0] qi, qq;
        qi = post_mem[32'h40000 + 4 * k][15:0]; qq = post_mem[32'h40000 + 4 * k][31:16];
        if (qq < -16'(A / 2)) n_pulse++;
        if (qi > 16'(A / 2) && qq > -16'(A / 8) && qq < 16'(A / 8)) n_base++;
      end
      check(n_pulse >= 5 && n_base >= 5, $sformatf("postage window: %0d pulse, %0d baseline samples", n_pulse, n_base));
    end
    // ADC capture contents: consecutive samples, Q = ~I.
    begin
      int bad; logic [15:0] i0, iv, qv;
      bad = 0;
      check(dram.exists(32'h10000), "ADC capture missing");
      i0 = dram[32'h10000][15:0];
      for (int w = 0; w < 32; w++) for (int s = 0; s < 16; s++) begin
        iv = dram.exists(32'h10000 + 64 * w) ? dram[32'h10000 + 64 * w][32 * s +: 16] : '0;
        qv = dram.exists(32'h10000 + 64 * w) ? dram[32'h10000 + 64 * w][32 * s + 16 +: 16] : '0;
        if (iv != i0 + 16'(16 * w + s) || qv != ~iv) bad++;
      end
      check(bad == 0, $sformatf("ADC capture: %0d bad samples", bad));
      bad = 0;
      for (int w = 0; w < 4; w++) for (int h = 0; h < 2; h++) begin
        logic signed [15:0] iv3, qv3;
        iv3 = dram.exists(32'h30000 + 64 * w) ? dram[32'h30000 + 64 * w][256 * h + 32 * 3 +: 16] : '0;
        qv3 = dram.exists(32'h30000 + 64 * w) ? dram[32'h30000 + 64 * w][256 * h + 32 * 3 + 16 +: 16] : '0;
        // channel 3 is either at baseline (A, 0) or in a pulse (A cos 1.5, -A sin 1.5)
        if (!(iv3 > 16'sd400 && iv3 < 16'(A + 100) && qv3 > -16'(A + 100) && qv3 < 16'sd100)) bad++;
      end
      check(bad == 0, $sformatf("IQ capture: %0d words without channel 3's tone", bad));
      check(dram.exists(32'h20000 + 64 * 15), "phase capture incomplete");
    end
    check(drops > 0, "no photon dropped while the buffers were held");

    $display("photons %0d (ch3 %0d ch17 %0d ch40 %0d ch50 %0d) spacing-ok %0d coincident %0d",
             n_phot, n_phot_ch[3], n_phot_ch[17], n_phot_ch[40], n_phot_ch[50], n_spacing_ok, n_dup);
    $display("swaps full %0d interval %0d dropped %0d postage words %0d captures %0d dac wraps %0d",
             swaps_full, swaps_interval, drops, n_post_words, caps_done, dac_wraps);
    // Mechanisms that must each have happened.
    check(n_phot > 0, "mechanism: trigger");
    if (!FULL) check(swaps_full > 0, "mechanism: swap on full buffer");
    check(swaps_interval > 0, "mechanism: swap on interval");
    check(drops > 0, "mechanism: drop");
    check(n_post_words >= 128, "mechanism: postage event");
    check(caps_done == 3, "mechanism: capture of each source");
    check(dac_wraps > 0, "mechanism: DAC loop");
    check(n_dup > 0, "mechanism: bin duplication");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
