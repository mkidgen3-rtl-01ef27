// mkidgen3_top: programmable-logic design of a 2048-channel MKID readout.
//
// Signal path (one 512 MHz clock, 8 channels per beat after bin selection):
//   OPFB bins (16/beat, from outside) -> bin_select -> ddc -> lowpass
//   (1 MHz fine channels) -> phase_cordic -> matched_filter -> trigger
//   -> photon_packager (photon list to processor memory)
//   trigger strobes + fine-channel IQ -> postage_capture (IQ snapshots)
// Calibration capture: filter_phase (matched-filter output), filter_iq
// (fine-channel IQ) and paired raw ADC samples -> capture_switch ->
// capture_fifo (to the 256 MHz memory clock, 512 bits) -> axis2mm -> AXI4
// master to the PL DRAM controller.
// Also: dac_replay drives the DACs from a waveform table, timestamps keeps
// the microsecond clock, and axil_cfg decodes processor register writes
// (byte address bits [25:22] pick the block, see mkid_pkg::blk_e).
//
// The polyphase filter bank, data converters, processor, DRAM controllers
// and the interconnects to processor memory are outside this module: their
// streams are ports. Capture block registers (word addresses): 0 source
// (0 phase, 1 IQ, 2 ADC), 1 length in 256-bit words, 2 start, 3 DRAM base,
// 16..24 filter_phase, 32..39 filter_iq. Status words (AXI4-Lite reads):
// 0 photons dropped, 1 last swapped buffer {count[31:1], buf[0]}, 2 postage
// events, 3 {pps_seen, overflow, err, done, busy}, 4/5 timestamp low/high,
// 6 current photon buffer.
// The block set and connections follow the paper's system block diagram;
// the register map and the point where IQ is tapped (after the low-pass)
// are this design's.
module mkidgen3_top
  import mkid_pkg::*;
#(
  parameter int unsigned N_CH   = 2048,
  parameter int unsigned N_BIN  = 4096,
  parameter int unsigned DAC_SAMPLES = 524288,
  parameter int unsigned MF_TAPS = 30,
  parameter int unsigned CLK_PER_US = 512,
  parameter int unsigned PHOT_BUF_BYTES = 819200
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        clk_mem,
  input  logic        rst_mem,
  // AXI4-Lite control
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_awaddr,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  input  logic [31:0] s_axil_wdata,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  output logic [1:0]  s_axil_bresp,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  input  logic [31:0] s_axil_araddr,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  // Time reference
  input  logic        pps,
  // Data converters
  input  logic        adc_valid,
  input  logic signed [7:0][15:0] adc_i,
  input  logic signed [7:0][15:0] adc_q,
  output logic        dac_valid,
  output logic signed [7:0][15:0] dac_i,
  output logic signed [7:0][15:0] dac_q,
  // Polyphase filter bank output
  input  logic        opfb_valid,
  input  logic        opfb_last,
  input  iq_t [OPFB_LANES-1:0] opfb_data,
  // Photon list to processor memory
  output logic        phot_mem_valid,
  input  logic        phot_mem_ready,
  output logic [39:0] phot_mem_addr,
  output photon_t     phot_mem_data,
  output logic        phot_swap_valid,
  output logic        phot_swap_buf,
  // Postage stamps to processor memory
  output logic        post_mem_valid,
  input  logic        post_mem_ready,
  output logic [39:0] post_mem_addr,
  output logic [31:0] post_mem_data,
  // Calibration capture AXI4 master (clk_mem)
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [31:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  output logic [511:0] m_axi_wdata,
  output logic [63:0] m_axi_wstrb,
  output logic        m_axi_wlast,
  input  logic        m_axi_bvalid,
  input  logic [1:0]  m_axi_bresp,
  output logic        m_axi_bready
);
  localparam int unsigned GROUPS = N_CH / LANES;
  localparam int unsigned GW     = $clog2(GROUPS);

  // ---------------- control ----------------
  logic        cfg_we;
  logic [3:0]  cfg_blk;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic [15:0][31:0] status;

  axil_cfg #(.NSTAT(16)) u_cfg (
    .clk, .rst,
    .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready), .s_awaddr(s_axil_awaddr),
    .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready), .s_wdata(s_axil_wdata),
    .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready), .s_bresp(s_axil_bresp),
    .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready), .s_araddr(s_axil_araddr),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .cfg_we, .cfg_blk, .cfg_addr, .cfg_wdata, .status);

  function automatic logic we_for(input logic we, input logic [3:0] blk, input blk_e b);
    return we && (blk == b);
  endfunction

  // ---------------- waveform replay ----------------
  dac_replay #(.SAMPLES(DAC_SAMPLES), .SPC(8)) u_dac (
    .clk, .rst, .cfg_we(we_for(cfg_we, cfg_blk, BLK_DAC)), .cfg_addr, .cfg_wdata,
    .dac_i, .dac_q, .dac_valid);

  // ---------------- time keeping ----------------
  logic [TS_W-1:0] ts;
  logic us_tick, pps_seen;
  timestamps #(.TS_W(TS_W), .CLK_PER_US(CLK_PER_US)) u_time (
    .clk, .rst, .pps, .cfg_we(we_for(cfg_we, cfg_blk, BLK_TIME)), .cfg_addr, .cfg_wdata,
    .ts, .us_tick, .pps_seen);

  // ---------------- channelizer back half ----------------
  logic bs_v, bs_l;  iq_t [LANES-1:0] bs_d;
  bin_select #(.NBINS(N_BIN), .NCH(N_CH), .IN_LANES(OPFB_LANES), .OUT_LANES(LANES)) u_binsel (
    .clk, .rst, .in_valid(opfb_valid), .in_last(opfb_last), .in_data(opfb_data),
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_BINSEL)), .cfg_addr, .cfg_wdata,
    .out_valid(bs_v), .out_last(bs_l), .out_data(bs_d));

  logic dd_v, dd_l;  iq_t [LANES-1:0] dd_d;
  ddc #(.NCH(N_CH), .LANES(LANES)) u_ddc (
    .clk, .rst, .in_valid(bs_v), .in_last(bs_l), .in_data(bs_d),
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_DDC)), .cfg_addr, .cfg_wdata,
    .out_valid(dd_v), .out_last(dd_l), .out_data(dd_d));

  logic lp_v, lp_l;  iq_t [LANES-1:0] lp_d;
  lowpass #(.NCH(N_CH), .LANES(LANES)) u_lp (
    .clk, .rst, .in_valid(dd_v), .in_last(dd_l), .in_data(dd_d),
    .out_valid(lp_v), .out_last(lp_l), .out_data(lp_d));

  // ---------------- phase, matched filter, trigger ----------------
  logic ph_v, ph_l;  logic signed [LANES-1:0][15:0] ph_d;
  phase_cordic #(.LANES(LANES)) u_phase (
    .clk, .rst, .in_valid(lp_v), .in_last(lp_l), .in_data(lp_d),
    .out_valid(ph_v), .out_last(ph_l), .out_data(ph_d));

  logic mf_v, mf_l;  logic signed [LANES-1:0][15:0] mf_d;
  matched_filter #(.NCH(N_CH), .LANES(LANES), .TAPS(MF_TAPS)) u_mf (
    .clk, .rst, .in_valid(ph_v), .in_last(ph_l), .in_data(ph_d),
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_MF)), .cfg_addr, .cfg_wdata,
    .out_valid(mf_v), .out_last(mf_l), .out_data(mf_d));

  logic [LANES-1:0] tr_pv, tr_tv;
  photon_t [LANES-1:0] tr_p;
  logic [GW-1:0] tr_g;
  trigger #(.NCH(N_CH), .LANES(LANES), .TS_W(TS_W)) u_trig (
    .clk, .rst, .in_valid(mf_v), .in_last(mf_l), .in_data(mf_d), .ts,
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_TRIG)), .cfg_addr, .cfg_wdata,
    .phot_valid(tr_pv), .phot(tr_p), .trig_valid(tr_tv), .trig_group(tr_g));

  // ---------------- photon and postage capture ----------------
  logic [$clog2(PHOT_BUF_BYTES/8):0] swap_count;
  logic [31:0] dropped;
  logic cur_buf;
  photon_packager #(.LANES(LANES), .BUF_BYTES(PHOT_BUF_BYTES), .TS_W(TS_W)) u_phot (
    .clk, .rst, .phot_valid(tr_pv), .phot(tr_p),
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_PHOT)), .cfg_addr, .cfg_wdata,
    .mem_valid(phot_mem_valid), .mem_ready(phot_mem_ready), .mem_addr(phot_mem_addr), .mem_data(phot_mem_data),
    .swap_valid(phot_swap_valid), .swap_buf(phot_swap_buf), .swap_count, .dropped, .cur_buf);

  logic [12:0] post_events;
  postage_capture #(.NCH(N_CH), .LANES(LANES), .TS_W(TS_W)) u_post (
    .clk, .rst, .iq_valid(lp_v), .iq_last(lp_l), .iq_data(lp_d),
    .trig_valid(tr_tv), .trig_group(tr_g), .ts,
    .cfg_we(we_for(cfg_we, cfg_blk, BLK_POST)), .cfg_addr, .cfg_wdata,
    .mem_valid(post_mem_valid), .mem_ready(post_mem_ready), .mem_addr(post_mem_addr), .mem_data(post_mem_data),
    .events(post_events));

  // ---------------- calibration capture ----------------
  logic cap_we;
  assign cap_we = we_for(cfg_we, cfg_blk, BLK_CAP);

  logic [1:0]  cap_sel;
  logic [31:0] cap_len, cap_base;
  logic        cap_start, cap_go;
  always_ff @(posedge clk) begin
    if (rst) begin
      cap_sel <= '0; cap_len <= '0; cap_base <= '0; cap_start <= 1'b0; cap_go <= 1'b0;
    end else begin
      cap_start <= 1'b0;
      if (cap_we && cfg_addr[19:2] == '0) begin
        case (cfg_addr[1:0])
          2'd0: cap_sel  <= cfg_wdata[1:0];
          2'd1: cap_len  <= cfg_wdata;
          2'd2: begin cap_start <= 1'b1; cap_go <= ~cap_go; end
          2'd3: cap_base <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  logic fp_v; logic [255:0] fp_d;
  filter_phase #(.GROUPS(GROUPS)) u_fphase (
    .clk, .rst, .in_valid(mf_v), .in_last(mf_l), .in_data(mf_d),
    .cfg_we((cap_we && cfg_addr[19:4] == 16'd1) || (cap_we && cfg_addr == 20'd2)),
    .cfg_addr((cap_we && cfg_addr == 20'd2) ? 20'd8 : {4'd0, cfg_addr[15:0] - 16'd16}),
    .cfg_wdata, .out_valid(fp_v), .out_data(fp_d));

  logic fi_v, fi_l; logic [255:0] fi_d;
  filter_iq #(.GROUPS(GROUPS)) u_fiq (
    .clk, .rst, .in_valid(lp_v), .in_last(lp_l), .in_data(lp_d),
    .cfg_we(cap_we && cfg_addr[19:4] == 16'd2), .cfg_addr({4'd0, cfg_addr[15:0] - 16'd32}), .cfg_wdata,
    .out_valid(fi_v), .out_last(fi_l), .out_data(fi_d));

  // Raw ADC: I and Q paired into complex samples (sample k = {Q[k], I[k]}).
  iq_t [7:0] adc_pair;
  always_comb for (int k = 0; k < 8; k++) adc_pair[k] = '{q: adc_q[k], i: adc_i[k]};

  logic sw_v, sw_l, sw_busy; logic [255:0] sw_d;
  capture_switch #(.W(256), .N_IN(3)) u_switch (
    .clk, .rst, .s_valid({adc_valid, fi_v, fp_v}), .s_data({adc_pair, fi_d, fp_d}),
    .sel(cap_sel), .start(cap_start), .len(cap_len),
    .m_valid(sw_v), .m_last(sw_l), .m_data(sw_d), .busy(sw_busy));

  logic f_v, f_l, f_rdy, overflow; logic [511:0] f_d; logic [6:0] f_cnt;
  capture_fifo #(.IW(256), .DEPTH(64)) u_fifo (
    .wclk(clk), .wrst(rst), .w_valid(sw_v), .w_last(sw_l), .w_data(sw_d), .overflow,
    .rclk(clk_mem), .rrst(rst_mem), .r_ready(f_rdy), .r_valid(f_v), .r_last(f_l), .r_data(f_d), .r_count(f_cnt));

  logic wr_done, wr_err;
  axis2mm #(.DW(512), .AW(32), .BURST(16), .CNT_W(7)) u_s2mm (
    .clk(clk_mem), .rst(rst_mem), .go_toggle(cap_go), .base(cap_base), .total((cap_len + 32'd1) >> 1),
    .f_valid(f_v), .f_last(f_l), .f_data(f_d), .f_count(f_cnt), .f_ready(f_rdy),
    .m_axi_awvalid, .m_axi_awready, .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst,
    .m_axi_wvalid, .m_axi_wready, .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast,
    .m_axi_bvalid, .m_axi_bresp, .m_axi_bready, .done(wr_done), .err(wr_err));

  // ---------------- status ----------------
  logic [31:0] swap_word;
  logic [1:0]  wr_sync_done, wr_sync_err;
  always_ff @(posedge clk) begin
    if (rst) begin
      swap_word <= '0; wr_sync_done <= '0; wr_sync_err <= '0;
    end else begin
      if (phot_swap_valid) swap_word <= {31'(swap_count), phot_swap_buf};
      wr_sync_done <= {wr_sync_done[0], wr_done};
      wr_sync_err  <= {wr_sync_err[0], wr_err};
    end
  end

  always_comb begin
    status     = '0;
    status[0]  = dropped;
    status[1]  = swap_word;
    status[2]  = 32'(post_events);
    status[3]  = {27'd0, pps_seen, overflow, wr_sync_err[1], wr_sync_done[1], sw_busy};
    status[4]  = ts[31:0];
    status[5]  = {28'd0, ts[35:32]};
    status[6]  = {31'd0, cur_buf};
  end

endmodule
