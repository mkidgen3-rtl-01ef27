// axil_cfg: AXI4-Lite control port of the readout.
//
// The processor configures every block (channel map, DDC tables, filter
// coefficients, trigger settings, capture controls) with 32-bit register
// writes. This slave accepts one write at a time: when both the address
// and data are valid it accepts them together, emits a one-cycle cfg_we
// with the block select (byte address bits [25:22]) and the word address
// inside the block (bits [21:2]), and answers OKAY on B. Reads return one
// of NSTAT status words chosen by byte address bits [2+SW-1:2] (the block
// field is ignored for reads).
// Timing: cfg_we comes 1 cycle after the handshake of AW and W; the B
// response follows in the same cycle; a read answers 1 cycle after AR.
// Configuration over AXI4-Lite follows the paper; the address map and the
// single status table are this design's.
module axil_cfg #(
  parameter int unsigned NSTAT = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [31:0] s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        cfg_we,
  output logic [3:0]  cfg_blk,
  output logic [19:0] cfg_addr,
  output logic [31:0] cfg_wdata,
  input  logic [NSTAT-1:0][31:0] status
);
  localparam int unsigned SW = $clog2(NSTAT);

  // Write: accept AW and W together when no response is pending.
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_we <= 1'b0; cfg_blk <= '0; cfg_addr <= '0; cfg_wdata <= '0; s_bvalid <= 1'b0;
    end else begin
      cfg_we <= 1'b0;
      if (s_awready) begin
        cfg_we    <= 1'b1;
        cfg_blk   <= s_awaddr[25:22];
        cfg_addr  <= s_awaddr[21:2];
        cfg_wdata <= s_wdata;
        s_bvalid  <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  assign s_arready = s_arvalid && !s_rvalid;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_rvalid <= 1'b0; s_rdata <= '0;
    end else if (s_arready) begin
      s_rvalid <= 1'b1;
      s_rdata  <= status[s_araddr[2 +: SW]];
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (rst) s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (rst) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
