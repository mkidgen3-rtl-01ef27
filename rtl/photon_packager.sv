// photon_packager: streams photon events into a pair of processor buffers.
//
// The trigger can complete up to LANES photons in one beat. Beats holding
// at least one photon enter a QDEPTH-beat queue and leave it one photon per
// cycle, lowest lane first, as 64-bit writes to processor memory. Photons
// fill one of two buffers of BUF_BYTES (800 KiB = 102400 photons) while the
// processor reads the other. The block swaps buffers when the current one
// is full, or when a photon arrives whose time is at least `interval`
// microseconds after the first photon in the buffer; that photon opens the
// new buffer. On a swap it reports the finished buffer and its photon count
// (swap_valid pulse). The processor returns a buffer with a release write;
// if the next buffer has not been released, photons are dropped and
// counted, and so are beats that find the queue full.
//
// Control (word addresses): 0: enable; 1: interval in us; 2: base address
// of buffer 0; 3: base address of buffer 1; 4: release buffer wdata[0].
// Write port: mem_valid/mem_ready handshake with mem_addr (byte address,
// base + 8 * index) and mem_data (one photon_t).
// Following the paper: two 800 KiB buffers, processor reads one while the
// other records, swap when full or after the time interval. The queue, the
// drop policy and the register map are this design's.
module photon_packager
  import mkid_pkg::photon_t;
#(
  parameter int unsigned LANES     = 8,
  parameter int unsigned BUF_BYTES = 819200,
  parameter int unsigned QDEPTH    = 16,
  parameter int unsigned TS_W      = 36
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [LANES-1:0] phot_valid,
  input  photon_t [LANES-1:0] phot,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        mem_valid,
  input  logic        mem_ready,
  output logic [39:0] mem_addr,
  output photon_t     mem_data,
  output logic        swap_valid,
  output logic        swap_buf,
  output logic [$clog2(BUF_BYTES/8):0] swap_count,
  output logic [31:0] dropped,
  output logic        cur_buf
);
  localparam int unsigned CAP = BUF_BYTES / 8;
  localparam int unsigned CW  = $clog2(CAP) + 1;
  localparam int unsigned QW  = $clog2(QDEPTH);

  typedef struct packed {
    logic [LANES-1:0]   mask;
    photon_t [LANES-1:0] p;
  } qent_t;

  logic        en;
  logic [31:0] interval;
  logic [31:0] base [2];
  logic [1:0]  free;          // buffer may be written

  qent_t       q [QDEPTH];
  logic [QW:0] wp, rp;
  logic        q_empty, q_full;
  assign q_empty = (wp == rp);
  assign q_full  = (wp[QW-1:0] == rp[QW-1:0]) && (wp[QW] != rp[QW]);

  logic [LANES-1:0] pend;      // photons left in the head entry
  logic [CW-1:0]    count;
  logic [TS_W-1:0]  first_ts;

  // Head photon (lowest pending lane).
  logic [$clog2(LANES)-1:0] sel;
  always_comb begin
    sel = '0;
    for (int l = LANES - 1; l >= 0; l--) if (pend[l]) sel = l[$clog2(LANES)-1:0];
  end

  photon_t   hp;
  logic      hv;
  assign hp = q[rp[QW-1:0]].p[sel];
  assign hv = !q_empty && (pend != '0);

  logic need_swap;
  logic [TS_W-1:0] dt;
  assign dt = hp.ts - first_ts;
  assign need_swap = (count == CW'(CAP)) || (count != '0 && dt >= TS_W'(interval));

  logic take;     // head photon consumed this cycle
  logic wr_ok;
  assign wr_ok = !need_swap || free[~cur_buf];
  assign take  = hv && !(mem_valid && !mem_ready);

  always_ff @(posedge clk) begin
    if (rst) begin
      en <= 1'b0; interval <= 32'd1000000; base[0] <= '0; base[1] <= 32'h0010_0000;
    end else if (cfg_we) begin
      case (cfg_addr[2:0])
        3'd0: en       <= cfg_wdata[0];
        3'd1: interval <= cfg_wdata;
        3'd2: base[0]  <= cfg_wdata;
        3'd3: base[1]  <= cfg_wdata;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; pend <= '0;
      count <= '0; first_ts <= '0; cur_buf <= 1'b0; free <= 2'b11;
      mem_valid <= 1'b0; mem_addr <= '0; mem_data <= '0;
      swap_valid <= 1'b0; swap_buf <= 1'b0; swap_count <= '0; dropped <= '0;
    end else begin
      swap_valid <= 1'b0;
      if (cfg_we && cfg_addr[2:0] == 3'd4) free[cfg_wdata[0]] <= 1'b1;

      // Enqueue.
      if (en && phot_valid != '0) begin
        if (!q_full) begin
          q[wp[QW-1:0]] <= '{mask: phot_valid, p: phot};
          wp <= wp + 1'b1;
        end else begin
          dropped <= dropped + 32'($countones(phot_valid));
        end
      end

      if (mem_valid && mem_ready) mem_valid <= 1'b0;

      if (take) begin
        pend[sel] <= 1'b0;
        if (!wr_ok) begin
          dropped <= dropped + 1'b1;
        end else begin
          logic          b;
          logic [CW-1:0] idx;
          b   = cur_buf;
          idx = count;
          if (need_swap) begin
            swap_valid <= 1'b1;
            swap_buf   <= cur_buf;
            swap_count <= count;
            b   = ~cur_buf;
            idx = '0;
            cur_buf <= b;
          end
          if (idx == '0) begin
            first_ts <= hp.ts;
            free[b]  <= 1'b0;
          end
          count     <= idx + 1'b1;
          mem_valid <= 1'b1;
          mem_addr  <= 40'(base[b]) + 40'({idx, 3'b000});
          mem_data  <= hp;
        end
      end

      // Pop the head entry when its last photon is taken; load the next mask.
      if (!q_empty && (pend == '0 || (take && (pend & ~(LANES'(1) << sel)) == '0))) begin
        if (pend == '0) begin
          pend <= q[rp[QW-1:0]].mask;
        end else begin
          rp   <= rp + 1'b1;
        end
      end
    end
  end

  // A request left waiting in one cycle must be presented unchanged in the next.
  a_hold: assert property (@(posedge clk) disable iff (rst)
    mem_valid && !mem_ready |=> mem_valid && $stable(mem_addr) && $stable(mem_data));

endmodule
