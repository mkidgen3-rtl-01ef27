// capture_fifo: dual-clock FIFO from the 512 MHz stream side to the
// 256 MHz memory-writer side, doubling the word width.
//
// On the write clock, 256-bit words are paired (first word in the low half)
// into 512-bit entries; a word marked last closes its entry even if it is
// the first half, the upper half then being zero. Entries go through a
// DEPTH-entry memory whose write and read pointers cross clock domains in
// Gray code through two-flop synchronizers. The read side sees r_valid,
// r_last and r_count (entries available, a lower bound) and pops with
// r_ready. A word that arrives while the FIFO is full is lost and sets the
// sticky overflow flag (write clock). Rates balance: 256 bits at 512 MHz
// equal 512 bits at 256 MHz.
// Timing: an entry is visible to the reader about 3 read-clock cycles after
// its write; r_data is the head entry (first-word fall-through).
// The clock domains and widths follow the paper's capture figure; the
// structure is a standard asynchronous FIFO.
module capture_fifo #(
  parameter int unsigned IW    = 256,
  parameter int unsigned DEPTH = 64
) (
  input  logic          wclk,
  input  logic          wrst,
  input  logic          w_valid,
  input  logic          w_last,
  input  logic [IW-1:0] w_data,
  output logic          overflow,
  input  logic          rclk,
  input  logic          rrst,
  input  logic          r_ready,
  output logic          r_valid,
  output logic          r_last,
  output logic [2*IW-1:0] r_data,
  output logic [$clog2(DEPTH):0] r_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic            last;
    logic [2*IW-1:0] data;
  } ent_t;

  ent_t mem [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [AW:0] rbin, rgray_r, wgray_r1, wgray_r2, wbin_r;

  // ---------------- write side ----------------
  logic [AW:0] wbin, wgray, rgray_w1, rgray_w2, rbin_w;
  logic        have_low;
  logic [IW-1:0] low;
  logic        w_full;

  assign rbin_w = gray2bin(rgray_w2);
  assign w_full = (wbin[AW-1:0] == rbin_w[AW-1:0]) && (wbin[AW] != rbin_w[AW]);

  always_ff @(posedge wclk) begin
    if (wrst) begin
      rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray_r; rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; have_low <= 1'b0; low <= '0; overflow <= 1'b0;
    end else if (w_valid) begin
      if (!have_low && !w_last) begin
        low      <= w_data;
        have_low <= 1'b1;
      end else begin
        have_low <= 1'b0;
        if (w_full) overflow <= 1'b1;
        else begin
          mem[wbin[AW-1:0]] <= '{last: w_last,
                                 data: have_low ? {w_data, low} : {{IW{1'b0}}, w_data}};
          wbin  <= wbin + 1'b1;
          wgray <= bin2gray(wbin + 1'b1);
        end
      end
    end
  end

  // ---------------- read side ----------------

  always_ff @(posedge rclk) begin
    if (rrst) begin
      wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end

  assign wbin_r  = gray2bin(wgray_r2);
  assign r_count = wbin_r - rbin;
  assign r_valid = (r_count != '0);
  assign r_data  = mem[rbin[AW-1:0]].data;
  assign r_last  = mem[rbin[AW-1:0]].last;

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray_r <= '0;
    end else if (r_valid && r_ready) begin
      rbin    <= rbin + 1'b1;
      rgray_r <= bin2gray(rbin + 1'b1);
    end
  end

endmodule
