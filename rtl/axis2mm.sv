// axis2mm: writes the capture stream into PL DRAM with AXI4 bursts.
//
// A capture of `total` 512-bit words is started by toggling `go_toggle`
// (from the stream clock domain; synchronised here). The writer then
// repeatedly waits until the FIFO holds the next burst (BURST words, or
// what remains), sends one AW request (INCR, 64-byte beats), streams the
// words with the final one marked wlast, and waits for the write response
// before the next burst. Addresses start at `base` (assumed 1 KiB aligned,
// so a burst never crosses a 4 KiB boundary) and increase by 64 bytes per
// word. `done` rises when the last response has come back; `err` is set if
// a response is not OKAY or the FIFO's last mark disagrees with the count.
// `base` and `total` are quasi-static: written before the toggle.
// Timing: one burst in flight; a burst of 16 takes 16 W cycles plus the
// AW/B handshakes, so the 16 GiB/s stream needs the memory to accept W
// beats back to back.
// Turning the capture stream into AXI4 writes follows the paper (which
// uses an open-source core for it); this minimal writer is this design's.
module axis2mm #(
  parameter int unsigned DW     = 512,
  parameter int unsigned AW     = 32,
  parameter int unsigned BURST  = 16,
  parameter int unsigned CNT_W  = 7
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           go_toggle,
  input  logic [AW-1:0]  base,
  input  logic [31:0]    total,
  // FIFO read side
  input  logic           f_valid,
  input  logic           f_last,
  input  logic [DW-1:0]  f_data,
  input  logic [CNT_W-1:0] f_count,
  output logic           f_ready,
  // AXI4 write channels
  output logic           m_axi_awvalid,
  input  logic           m_axi_awready,
  output logic [AW-1:0]  m_axi_awaddr,
  output logic [7:0]     m_axi_awlen,
  output logic [2:0]     m_axi_awsize,
  output logic [1:0]     m_axi_awburst,
  output logic           m_axi_wvalid,
  input  logic           m_axi_wready,
  output logic [DW-1:0]  m_axi_wdata,
  output logic [DW/8-1:0] m_axi_wstrb,
  output logic           m_axi_wlast,
  input  logic           m_axi_bvalid,
  input  logic [1:0]     m_axi_bresp,
  output logic           m_axi_bready,
  output logic           done,
  output logic           err
);
  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_e;
  state_e state;

  logic [2:0]  go_s;
  logic [31:0] remaining;
  logic [8:0]  blen, bcnt;
  logic        active;

  always_ff @(posedge clk) begin
    if (rst) go_s <= '0;
    else     go_s <= {go_s[1:0], go_toggle};
  end
  wire go = go_s[2] ^ go_s[1];

  wire [8:0] next_len = (remaining >= 32'(BURST)) ? 9'(BURST) : 9'(remaining);

  assign m_axi_awsize  = 3'($clog2(DW / 8));
  assign m_axi_awburst = 2'b01;
  assign m_axi_wstrb   = '1;
  assign m_axi_wdata   = f_data;
  assign m_axi_wvalid  = (state == S_DATA) && f_valid;
  assign m_axi_wlast   = (bcnt == blen - 1'b1);
  assign f_ready       = (state == S_DATA) && m_axi_wready;
  assign m_axi_bready  = (state == S_RESP);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; remaining <= '0; active <= 1'b0; done <= 1'b0; err <= 1'b0;
      blen <= '0; bcnt <= '0; m_axi_awvalid <= 1'b0; m_axi_awaddr <= '0; m_axi_awlen <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (go) begin
            remaining    <= total;
            m_axi_awaddr <= base;
            active       <= (total != '0);
            done         <= (total == '0);
            err          <= 1'b0;
          end else if (active && 32'(f_count) >= 32'(next_len)) begin
            blen          <= next_len;
            bcnt          <= '0;
            m_axi_awlen   <= 8'(next_len - 1'b1);
            m_axi_awvalid <= 1'b1;
            state         <= S_ADDR;
          end
        end
        S_ADDR: if (m_axi_awready) begin
          m_axi_awvalid <= 1'b0;
          state         <= S_DATA;
        end
        S_DATA: if (m_axi_wvalid && m_axi_wready) begin
          if (f_last != (remaining == 32'd1)) err <= 1'b1;
          remaining <= remaining - 1'b1;
          bcnt      <= bcnt + 1'b1;
          if (m_axi_wlast) state <= S_RESP;
        end
        S_RESP: if (m_axi_bvalid) begin
          if (m_axi_bresp != 2'b00) err <= 1'b1;
          m_axi_awaddr <= m_axi_awaddr + AW'(blen * (DW / 8));
          if (remaining == '0) begin
            active <= 1'b0;
            done   <= 1'b1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: an address request is held, unchanged, until accepted.
  a_aw_stable: assert property (@(posedge clk) disable iff (rst)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr) && $stable(m_axi_awlen));

endmodule
