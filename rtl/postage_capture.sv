// postage_capture: short IQ snapshots around photon triggers.
//
// For debugging the trigger, up to NMON = 16 user-chosen channels are
// watched. Each keeps the last 128 IQ samples of its channel in a ring
// buffer. When the trigger fires on a watched channel that is not already
// capturing, the block waits for WIN - PRE more samples of that channel,
// freezes the ring, and writes one event: a header word then the WIN = 127
// most recent samples, oldest first, i.e. PRE samples before the trigger
// sample and the rest from it on. An event is 128 32-bit words (512 bytes)
// at base + 512 * event number. Up to MAX_EVENTS (8000) events are written
// after an arm command; later triggers are ignored.
//
// Header word: {ts[20:0], channel[10:0]} (low 21 bits of the microsecond
// timestamp, so it can be matched with the photon list). Sample words are
// {Q, I}.
// Control (word addresses): 0..15: watched channel of slot n in bits
// [10:0], bit 31 = slot enabled; 16: base address; 17: arm (clears the
// event count and enables capture when wdata[0] = 1).
// Write port: mem_valid/mem_ready with mem_addr (byte address) and
// mem_data; one word per accepted cycle, one event at a time.
// The 16 channels, 127-sample window and 8000-event limit follow the
// paper; the PRE split, header format and ring sizing are this design's.
module postage_capture
  import mkid_pkg::iq_t;
#(
  parameter int unsigned NCH        = 2048,
  parameter int unsigned LANES      = 8,
  parameter int unsigned NMON       = 16,
  parameter int unsigned WIN        = 127,
  parameter int unsigned PRE        = 32,
  parameter int unsigned MAX_EVENTS = 8000,
  parameter int unsigned TS_W       = 36
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        iq_valid,
  input  logic        iq_last,
  input  iq_t [LANES-1:0] iq_data,
  input  logic [LANES-1:0] trig_valid,
  input  logic [$clog2(NCH/LANES)-1:0] trig_group,
  input  logic [TS_W-1:0] ts,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        mem_valid,
  input  logic        mem_ready,
  output logic [39:0] mem_addr,
  output logic [31:0] mem_data,
  output logic [$clog2(MAX_EVENTS+1)-1:0] events
);
  localparam int unsigned GROUPS = NCH / LANES;
  localparam int unsigned GW     = $clog2(GROUPS);
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned CW     = $clog2(NCH);
  localparam int unsigned RD     = 128;          // ring depth
  localparam int unsigned SW     = $clog2(NMON);
  localparam int unsigned EW     = $clog2(MAX_EVENTS+1);

  initial assert (WIN < RD && PRE < WIN) else $error("postage_capture: bad window");

  logic [CW-1:0] mon_chan [NMON];
  logic [NMON-1:0] mon_en;
  logic [31:0]   base;
  logic          armed;

  iq_t           ring [NMON][RD];
  logic [6:0]    wptr [NMON];
  logic [NMON-1:0] capt, ready;
  logic [6:0]    post [NMON];
  logic [31:0]   hdr  [NMON];

  logic          dumping;
  logic [SW-1:0] dslot;
  logic [7:0]    didx;
  logic [EW-1:0] reserved;

  initial begin
    for (int s = 0; s < NMON; s++)
      for (int k = 0; k < RD; k++) ring[s][k] = '0;
  end

  logic [GW-1:0] iq_beat;
  always_ff @(posedge clk) begin
    if (rst)           iq_beat <= '0;
    else if (iq_valid) iq_beat <= iq_last ? '0 : iq_beat + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      mon_en <= '0; base <= '0; armed <= 1'b0;
      for (int s = 0; s < NMON; s++) mon_chan[s] <= '0;
    end else if (cfg_we) begin
      if (cfg_addr[4] == 1'b0) begin
        mon_chan[cfg_addr[SW-1:0]] <= cfg_wdata[CW-1:0];
        mon_en[cfg_addr[SW-1:0]]   <= cfg_wdata[31];
      end else if (cfg_addr[0] == 1'b0) base  <= cfg_wdata;
      else                              armed <= cfg_wdata[0];
    end
  end

  wire arm_cmd = cfg_we && cfg_addr[4] && cfg_addr[0];

  // Which slot the dump engine would take next.
  logic          any_ready;
  logic [SW-1:0] next_slot;
  always_comb begin
    any_ready = |ready;
    next_slot = '0;
    for (int s = NMON - 1; s >= 0; s--) if (ready[s]) next_slot = SW'(s);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      capt <= '0; ready <= '0; reserved <= '0; events <= '0;
      dumping <= 1'b0; dslot <= '0; didx <= '0;
      mem_valid <= 1'b0; mem_addr <= '0; mem_data <= '0;
      for (int s = 0; s < NMON; s++) begin
        wptr[s] <= '0; post[s] <= '0; hdr[s] <= '0;
      end
    end else begin
      logic [EW-1:0] res;
      res = reserved;
      if (arm_cmd) begin
        res = '0;
        events <= '0;
      end

      for (int s = 0; s < NMON; s++) begin
        // Sample into the ring unless the slot waits for or is in a dump.
        if (iq_valid && mon_en[s] && iq_beat == mon_chan[s][CW-1:LW] && !ready[s]
            && !(dumping && dslot == SW'(s))) begin
          ring[s][wptr[s]] <= iq_data[mon_chan[s][LW-1:0]];
          wptr[s] <= wptr[s] + 1'b1;
          if (capt[s]) begin
            if (post[s] == 7'd1) begin
              capt[s]  <= 1'b0;
              ready[s] <= 1'b1;
            end
            post[s] <= post[s] - 1'b1;
          end
        end
        // Start a capture on a trigger in this slot's channel.
        if (armed && mon_en[s] && !capt[s] && !ready[s] && !(dumping && dslot == SW'(s))
            && trig_group == mon_chan[s][CW-1:LW] && trig_valid[mon_chan[s][LW-1:0]]
            && res < EW'(MAX_EVENTS)) begin
          capt[s] <= 1'b1;
          post[s] <= 7'(WIN - PRE);
          hdr[s]  <= {ts[20:0], 11'(mon_chan[s])};
          res = res + 1'b1;
        end
      end
      reserved <= res;

      // Dump engine.
      if (mem_valid && mem_ready) mem_valid <= 1'b0;
      if (!dumping) begin
        if (any_ready) begin
          dumping <= 1'b1;
          dslot   <= next_slot;
          didx    <= '0;
        end
      end else if (!mem_valid || mem_ready) begin
        mem_valid <= 1'b1;
        mem_addr  <= 40'(base) + 40'({events, didx[6:0], 2'b00});
        if (didx == '0) mem_data <= hdr[dslot];
        else            mem_data <= ring[dslot][7'(wptr[dslot] - 7'(WIN) + 7'(didx - 1'b1))];
        if (didx == 8'(WIN)) begin
          dumping      <= 1'b0;
          ready[dslot] <= 1'b0;
          events       <= events + 1'b1;
        end
        didx <= didx + 1'b1;
      end
    end
  end

  // A request left waiting in one cycle must be presented unchanged in the next.
  a_hold: assert property (@(posedge clk) disable iff (rst)
    mem_valid && !mem_ready |=> mem_valid && $stable(mem_addr) && $stable(mem_data));

endmodule
