// tb_trigger: 32 channels with random per-channel thresholds and holdoffs
// (including out-of-range holdoffs that must clamp to 8..254). Random noisy
// phase streams with occasional negative pulses are fed in; a plain
// per-channel reference model (idle -> trigger below thr*128 -> track the
// minimum for `holdoff` samples -> emit) predicts every photon and every
// trigger strobe, which are compared with the outputs in order.
module tb_trigger;
  import mkid_pkg::*;
  localparam int NC = 32, L = 8, G = NC / L, NF = 3000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0; logic signed [L-1:0][15:0] in_data = '0;
  logic [35:0] ts = 36'd5000;
  logic cfg_we = 0; logic [19:0] cfg_addr = '0; logic [31:0] cfg_wdata = '0;
  logic [L-1:0] phot_valid; photon_t [L-1:0] phot;
  logic [L-1:0] trig_valid; logic [1:0] trig_group;
  int checks = 0, failures = 0;

  trigger #(.NCH(NC), .LANES(L), .TS_W(36)) dut (.*);

  int thr [NC], hold [NC];
  // reference state
  int cnt [NC], mn [NC]; longint tt [NC];
  photon_t exp_q [$];
  int exp_trig [$];
  int n_phot = 0, n_trig = 0, clamped = 0;

  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < L; l++) begin
      if (phot_valid[l]) begin
        photon_t e;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected photon"); end
        else begin
          e = exp_q.pop_front();
          if (phot[l] !== e) begin
            failures++;
            if (failures < 30) $display("FAIL photon got ch%0d t%0d p%0d exp ch%0d t%0d p%0d",
              phot[l].chan, phot[l].ts, phot[l].phase, e.chan, e.ts, e.phase);
          end
        end
        n_phot++;
      end
      if (trig_valid[l]) begin
        checks++;
        if (exp_trig.size() == 0 || exp_trig.pop_front() != int'(trig_group) * L + l) failures++;
        n_trig++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int c = 0; c < NC; c++) begin
      int h;
      thr[c] = -int'($urandom_range(120)) - 5;
      h = $urandom_range(255);
      if (c == 0) h = 2;
      if (c == 1) h = 255;
      hold[c] = (h < 8) ? 8 : (h > 254) ? 254 : h;
      if (h != hold[c]) clamped++;
      @(negedge clk); cfg_we = 1; cfg_addr = 20'(c); cfg_wdata = {16'd0, 8'(h), 8'(thr[c])};
      @(negedge clk); cfg_we = 0;
      cnt[c] = 0; mn[c] = 0; tt[c] = 0;
    end
    for (int f = 0; f < NF; f++) begin
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        if (g == 0) ts = 36'(5000 + f);
        in_valid = 1; in_last = (g == G - 1);
        for (int l = 0; l < L; l++) begin
          int c, p;
          c = g * L + l;
          p = int'($urandom_range(4000)) - 2000;
          if ($urandom_range(99) < 3) p = -int'($urandom_range(25000));
          in_data[l] = 16'(p);
          // reference model, one sample
          if (cnt[c] == 0) begin
            if (p < thr[c] * 128) begin
              cnt[c] = hold[c]; mn[c] = p; tt[c] = ts;
              exp_trig.push_back(c);
            end
          end else begin
            if (p < mn[c]) mn[c] = p;
            cnt[c]--;
            if (cnt[c] == 0) exp_q.push_back('{ts: 36'(tt[c]), chan: 12'(c), phase: 16'(mn[c])});
          end
        end
      end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (4) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d photons missing", exp_q.size()); end
    checks++; if (n_phot < 50) begin failures++; $display("FAIL too few photons %0d", n_phot); end
    checks++; if (exp_trig.size() != 0) failures++;
    $display("photons %0d triggers %0d clamped holdoffs %0d", n_phot, n_trig, clamped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
