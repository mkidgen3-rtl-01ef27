// capture_switch: selects one calibration stream and records a fixed length.
//
// Three sources can be captured to the PL DRAM: packed phase words,
// selected IQ groups and raw ADC samples (I and Q paired into 32-bit
// complex samples). `sel` chooses one. A start command opens the switch
// for exactly `len` words of the chosen source; the last one is marked
// with m_last so the memory writer can close its final burst, and `busy`
// stays high until then. This gives the finite-length snapshots used for
// setup (frequency sweeps, IQ loops, phase noise, raw ADC data) while the
// photon pipeline keeps running.
// Control: sel, len and start come from registers of the capture block
// (start is a one-cycle pulse, ignored while busy).
// Timing: 1-cycle latency; words are counted only when the source is valid.
// Source order follows the paper's capture figure; the start/length
// control is this design's.
module capture_switch #(
  parameter int unsigned W    = 256,
  parameter int unsigned N_IN = 3
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [N_IN-1:0]         s_valid,
  input  logic [N_IN-1:0][W-1:0]  s_data,
  input  logic [1:0]              sel,
  input  logic                    start,
  input  logic [31:0]             len,
  output logic                    m_valid,
  output logic                    m_last,
  output logic [W-1:0]            m_data,
  output logic                    busy
);
  logic [31:0] left;
  logic [1:0]  cur;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; left <= '0; cur <= '0;
      m_valid <= 1'b0; m_last <= 1'b0; m_data <= '0;
    end else begin
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      if (!busy) begin
        if (start && len != '0 && 32'(sel) < N_IN) begin
          busy <= 1'b1;
          left <= len;
          cur  <= sel;
        end
      end else if (s_valid[cur]) begin
        m_valid <= 1'b1;
        m_data  <= s_data[cur];
        m_last  <= (left == 32'd1);
        left    <= left - 1'b1;
        if (left == 32'd1) busy <= 1'b0;
      end
    end
  end
endmodule
