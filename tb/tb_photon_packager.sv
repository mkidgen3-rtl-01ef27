// tb_photon_packager: buffers of 64 bytes (8 photons) and a 4-beat queue.
// A reference model of the two-buffer scheme predicts, photon by photon,
// the write address (or a drop) and every buffer swap. Phases: fill and
// swap on full, swap on the time interval, drop while the next buffer is
// unreleased, release and resume, and queue overflow with the memory port
// stalled. The memory port's ready toggles randomly, and the held request
// must stay stable.
module tb_photon_packager;
  import mkid_pkg::*;
  localparam int L = 8, BUFB = 64, CAP = BUFB / 8, QD = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [L-1:0] phot_valid = '0; photon_t [L-1:0] phot = '0;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic mem_valid, mem_ready = 1; logic [39:0] mem_addr; photon_t mem_data;
  logic swap_valid, swap_buf; logic [$clog2(CAP):0] swap_count;
  logic [31:0] dropped; logic cur_buf;
  int checks = 0, failures = 0;

  photon_packager #(.LANES(L), .BUF_BYTES(BUFB), .QDEPTH(QD), .TS_W(36)) dut (.*);

  // Reference model.
  int m_cur = 0, m_count = 0, m_drop = 0; longint m_first = 0; bit m_free [2] = '{1, 1};
  longint base [2] = '{32'h1000, 32'h2000};
  longint interval = 1000000;
  typedef struct { longint addr; photon_t p; } wr_t;
  wr_t exp_w [$];
  int  exp_swap [$];   // buf*1000 + count

  function automatic void model(photon_t p);
    bit need;
    need = (m_count == CAP) || (m_count != 0 && longint'(36'(p.ts - 36'(m_first))) >= interval);
    if (need && !m_free[1 - m_cur]) begin m_drop++; return; end
    if (need) begin
      exp_swap.push_back(m_cur * 1000 + m_count);
      m_cur = 1 - m_cur; m_count = 0;
    end
    if (m_count == 0) begin m_first = p.ts; m_free[m_cur] = 0; end
    exp_w.push_back('{base[m_cur] + 8 * m_count, p});
    m_count++;
  endfunction

  int n_w = 0, n_swap = 0, n_full_swap = 0;
  always @(posedge clk) if (!rst) begin
    if (mem_valid && mem_ready) begin
      wr_t e;
      checks++;
      if (exp_w.size() == 0) begin failures++; $display("FAIL unexpected write"); end
      else begin
        e = exp_w.pop_front();
        if (mem_addr != 40'(e.addr) || mem_data !== e.p) begin
          failures++; $display("FAIL write addr %h exp %h", mem_addr, e.addr);
        end
      end
      n_w++;
    end
    if (swap_valid) begin
      checks++;
      if (exp_swap.size() == 0 || exp_swap.pop_front() != int'(swap_buf) * 1000 + int'(swap_count)) begin
        failures++; $display("FAIL swap buf %0d count %0d", swap_buf, swap_count);
      end
      n_swap++;
      if (swap_count == CAP) n_full_swap++;
    end
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 20'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  int pnum = 0;
  task automatic beat(input logic [L-1:0] mask, input longint t);
    @(negedge clk);
    phot_valid = mask;
    for (int l = 0; l < L; l++) begin
      phot[l] = '{ts: 36'(t), chan: 12'(pnum * 8 + l), phase: -16'(pnum)};
      pnum++;
    end
    @(negedge clk); phot_valid = '0;
  endtask
  task automatic run_model(input logic [L-1:0] mask);
    for (int l = 0; l < L; l++) if (mask[l]) model(phot[l]);
  endtask
  task automatic drain();
    repeat (60) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wr(2, 32'h1000); wr(3, 32'h2000); wr(0, 1);
    // 1: fill buffer 0 and swap on full.
    for (int k = 0; k < 5; k++) begin
      logic [L-1:0] m; m = (k == 0) ? 8'b1011_0001 : 8'b0000_0010 << k;
      beat(m, 100 + k); run_model(m);
    end
    drain();
    // 2: release buffer 0; interval swap.
    wr(4, 0); m_free[0] = 1;
    wr(1, 50); interval = 50;
    beat(8'h01, 200); run_model(8'h01);
    beat(8'h01, 260); run_model(8'h01);  // >= 50 after first photon: swap
    beat(8'h01, 270); run_model(8'h01);
    beat(8'h01, 400); run_model(8'h01);  // next buffer not released: dropped
    drain();
    checks++; if (dropped != 32'(m_drop)) begin failures++; $display("FAIL drops %0d exp %0d", dropped, m_drop); end
    // 3: release and resume.
    wr(4, 1); m_free[1] = 1;
    beat(8'h03, 410); run_model(8'h03);
    drain();
    // 4: queue overflow with the memory stalled.
    wr(4, 0); m_free[0] = 1;
    wr(4, 1); m_free[1] = 1;
    wr(1, 1000000); interval = 1000000;
    mem_ready = 0;
    for (int k = 0; k < QD + 3; k++) begin
      beat(8'hFF, 500 + k);
      if (k < QD) run_model(8'hFF); else m_drop += 8;
    end
    mem_ready = 1;
    drain();
    checks++; if (dropped != 32'(m_drop)) begin failures++; $display("FAIL drops %0d exp %0d", dropped, m_drop); end
    checks++; if (exp_w.size() != 0) begin failures++; $display("FAIL %0d writes missing", exp_w.size()); end
    checks++; if (exp_swap.size() != 0) failures++;
    checks++; if (n_full_swap == 0 || n_swap < 3) failures++;
    $display("writes %0d swaps %0d (full %0d) drops %0d", n_w, n_swap, n_full_swap, dropped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random stalls in phases 1-3 (phase 4 holds ready low itself).
  initial begin
    forever begin
      @(negedge clk);
      if (pnum < 80 && !rst) mem_ready = ($urandom_range(3) != 0);
    end
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
