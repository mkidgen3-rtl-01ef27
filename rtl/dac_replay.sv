// dac_replay: loops a stored complex waveform out to the I and Q DACs.
//
// The readout comb is computed in software and written into a table of
// SAMPLES complex samples (2^19 by default, 32 bits each: 2 MiB). With the
// DACs at 4.096 GS/s this gives 4.096e9 / 2^19 = 7.8125 kHz between
// representable tone frequencies. The table is split into SPC banks so that
// one 512 MHz beat reads SPC consecutive samples (sample k of the waveform
// lives in bank k % SPC at row k / SPC); the row pointer wraps at a
// programmable loop length, by default the whole table.
//
// Control (word addresses on cfg_*):
//   addr[19] = 0 : write sample addr[18:0] with {Q[31:16], I[15:0]}
//   addr[19] = 1, addr[0] = 0 : bit 0 = run
//   addr[19] = 1, addr[0] = 1 : loop length in beats (0 = whole table)
// Timing: dac_i/dac_q are registered; the first beat appears one cycle after
// run is set, row 0 first. The table size and sample format follow the
// paper; the banking, run bit and loop-length register are this design's.
module dac_replay
  import mkid_pkg::iq_t;
#(
  parameter int unsigned SAMPLES = 524288,
  parameter int unsigned SPC     = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic signed [SPC-1:0][15:0] dac_i,
  output logic signed [SPC-1:0][15:0] dac_q,
  output logic        dac_valid
);
  localparam int unsigned ROWS = SAMPLES / SPC;
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned BW   = $clog2(SPC);

  iq_t mem [SPC][ROWS];

  logic          run;
  logic [RW:0]   loop_len;   // 0 means ROWS
  logic [RW-1:0] row;
  logic [RW:0]   last_row;

  initial begin
    for (int b = 0; b < SPC; b++)
      for (int r = 0; r < ROWS; r++) mem[b][r] = '0;
  end

  // Table writes: one sample per write, bank = low address bits.
  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_addr[19])
      mem[cfg_addr[BW-1:0]][cfg_addr[RW+BW-1:BW]] <= iq_t'(cfg_wdata);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run      <= 1'b0;
      loop_len <= '0;
    end else if (cfg_we && cfg_addr[19]) begin
      if (!cfg_addr[0]) run      <= cfg_wdata[0];
      else              loop_len <= cfg_wdata[RW:0];
    end
  end

  assign last_row = (loop_len == '0) ? (RW+1)'(ROWS - 1) : loop_len - 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      row       <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= run;
      if (!run)                              row <= '0;
      else if ({1'b0, row} >= last_row)      row <= '0;
      else                                   row <= row + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < SPC; b++) begin
      dac_i[b] <= run ? mem[b][row].i : 16'sd0;
      dac_q[b] <= run ? mem[b][row].q : 16'sd0;
    end
  end

endmodule
