// pulsar_daq_top: programmable-logic firmware of one RFSoC sample board of the
// low-frequency pulsar backend.
//
// Eight ADC streams, each eight signed 16-bit samples per cycle of the AXI-Stream
// clock adc_clk (800 Msps per ADC at 100 MHz), are turned into UDP payloads of a 64-bit
// packet counter plus 4096 signed 8-bit samples and sent, one packet at a time,
// through a single 512-bit AXI-Stream to the 100 GbE block on eth_clk. Streams start
// together on the first 1PPS edge after the processing system sets arm, so that boards
// sharing 1PPS and a 10 MHz reference produce aligned data.
//
//   adc_clk domain: adc_sync_ctrl (SYSREF capture for the converter, 1PPS capture and
//                   start trigger), 8 x data_stream (scale, pass, widen, frame,
//                   tag, cache FIFO) ending in a dual-clock FIFO
//   eth_clk domain: axis_switch_pkt (8:1, whole packets), axis_detach_tid,
//                   insert_header_axis + packet_counter, axis_pause, mmio_regs
//
// Not built here, and connected through ports: the RF data converter (its AXI-Stream
// outputs enter as s_adc_*, its user SYSREF input is user_sysref_adc), the clocking
// wizard and input buffers (their clocks enter as pl_refclk, pl_sysref, adc_clk), the
// 100 GbE block (m_eth_* with dest_ip/dest_port) and the processing system (the
// AXI4-Lite port, clocked by eth_clk here).
//
// Settings written in the eth_clk domain (arm, tx_enable, shift_count) reach adc_clk
// through two-flop synchronisers; they are quasi-static, changed only while stopped.
// The structure follows the paper's block designs; the register map, clocking of the
// register block and FIFO depths are this design's choices.
module pulsar_daq_top
  import pb_pkg::*;
#(
  parameter int unsigned N_STREAMS_P = N_STREAMS,
  parameter int unsigned CACHE_DEPTH = 1024,
  parameter int unsigned CDC_DEPTH   = 128
) (
  // clocks and synchronisation inputs
  input  logic                       pl_refclk,
  input  logic                       pl_sysref,
  input  logic                       adc_clk,
  input  logic                       adc_rst,
  input  logic                       pps_in,
  output logic                       user_sysref_adc,
  output logic                       user_sysref_dac,
  output logic                       data_valid,
  // ADC AXI-Stream outputs of the data converter
  input  logic [N_SAMPLES*ADC_W-1:0] s_adc_tdata  [N_STREAMS_P],
  input  logic [N_STREAMS_P-1:0]     s_adc_tvalid,
  output logic [31:0]                overflow_cnt [N_STREAMS_P],
  // Ethernet side
  input  logic                       eth_clk,
  input  logic                       eth_rst,
  output logic [WIDE_W-1:0]          m_eth_tdata,
  output logic [KEEP_W-1:0]          m_eth_tkeep,
  output logic                       m_eth_tlast,
  output logic                       m_eth_tvalid,
  input  logic                       m_eth_tready,
  output logic [31:0]                dest_ip,
  output logic [15:0]                dest_port,
  output logic [TID_W-1:0]           tid,
  // AXI4-Lite from the processing system (eth_clk)
  input  logic [7:0]                 s_axil_awaddr,
  input  logic                       s_axil_awvalid,
  output logic                       s_axil_awready,
  input  logic [31:0]                s_axil_wdata,
  input  logic                       s_axil_wvalid,
  output logic                       s_axil_wready,
  output logic [1:0]                 s_axil_bresp,
  output logic                       s_axil_bvalid,
  input  logic                       s_axil_bready,
  input  logic [7:0]                 s_axil_araddr,
  input  logic                       s_axil_arvalid,
  output logic                       s_axil_arready,
  output logic [31:0]                s_axil_rdata,
  output logic [1:0]                 s_axil_rresp,
  output logic                       s_axil_rvalid,
  input  logic                       s_axil_rready
);
  // ---------------- settings and their clock crossing ----------------
  logic                   arm_e, arm_a;
  logic [N_STREAMS_P-1:0] tx_enable_e, tx_enable_a;
  logic [3:0]             shift_e, shift_a;
  logic [7:0]             pause_count;
  logic                   data_valid_e;
  logic                   arm_e_q, counter_clear;

  clock_domain_cross_2_reg u_arm_sync (.clk(adc_clk), .d_in(arm_e), .d_out(arm_a));
  clock_domain_cross_2_reg u_dv_sync  (.clk(eth_clk), .d_in(data_valid), .d_out(data_valid_e));
  for (genvar i = 0; i < N_STREAMS_P; i++) begin : g_en_sync
    clock_domain_cross_2_reg u_en_sync (.clk(adc_clk), .d_in(tx_enable_e[i]), .d_out(tx_enable_a[i]));
  end
  for (genvar i = 0; i < 4; i++) begin : g_shift_sync
    clock_domain_cross_2_reg u_sh_sync (.clk(adc_clk), .d_in(shift_e[i]), .d_out(shift_a[i]));
  end

  // ---------------- synchronisation and start trigger ----------------
  adc_sync_ctrl u_sync (
    .pl_refclk(pl_refclk), .pl_sysref(pl_sysref), .clk(adc_clk), .reset(adc_rst),
    .arm(arm_a), .pps_in(pps_in),
    .user_sysref_adc(user_sysref_adc), .user_sysref_dac(user_sysref_dac),
    .data_valid(data_valid));

  // ---------------- per-stream paths ----------------
  wide_beat_t             st_beat   [N_STREAMS_P];
  logic [N_STREAMS_P-1:0] st_tvalid, st_tready;

  for (genvar i = 0; i < N_STREAMS_P; i++) begin : g_stream
    data_stream #(.ID(i), .CACHE_DEPTH(CACHE_DEPTH), .CDC_DEPTH(CDC_DEPTH)) u_stream (
      .adc_clk(adc_clk), .adc_rst(adc_rst), .shift_count(shift_a),
      .pass(data_valid && tx_enable_a[i]),
      .s_adc_tdata(s_adc_tdata[i]), .s_adc_tvalid(s_adc_tvalid[i]),
      .overflow_cnt(overflow_cnt[i]),
      .eth_clk(eth_clk), .eth_rst(eth_rst),
      .m_beat(st_beat[i]), .m_tvalid(st_tvalid[i]), .m_tready(st_tready[i]));
  end

  // ---------------- merge and packetise ----------------
  wide_beat_t        sw_beat;
  logic              sw_tvalid, sw_tready;
  logic [WIDE_W-1:0] dt_tdata;
  logic              dt_tlast, dt_tvalid, dt_tready;
  logic [WIDE_W-1:0] ih_tdata;
  logic [KEEP_W-1:0] ih_tkeep;
  logic              ih_tlast, ih_tvalid, ih_tready;
  logic [HDR_W-1:0]  header;
  logic              header_increase;

  axis_switch_pkt #(.N(N_STREAMS_P)) u_switch (
    .clk(eth_clk), .rst(eth_rst),
    .s_beat(st_beat), .s_tvalid(st_tvalid), .s_tready(st_tready),
    .m_beat(sw_beat), .m_tvalid(sw_tvalid), .m_tready(sw_tready));

  axis_detach_tid u_detach (
    .clk(eth_clk), .rst(eth_rst),
    .s_beat(sw_beat), .s_tvalid(sw_tvalid), .s_tready(sw_tready),
    .m_tdata(dt_tdata), .m_tlast(dt_tlast), .m_tvalid(dt_tvalid), .m_tready(dt_tready),
    .pkt_done(header_increase), .tid(tid));

  // counters restart when a capture is armed; packets still draining from an earlier
  // capture keep their numbers
  always_ff @(posedge eth_clk) begin
    if (eth_rst) arm_e_q <= 1'b0;
    else         arm_e_q <= arm_e;
  end
  assign counter_clear = arm_e && !arm_e_q;

  packet_counter #(.N(N_STREAMS_P)) u_pkt_cnt (
    .clk(eth_clk), .rst(eth_rst), .clear(counter_clear), .tid(tid),
    .increase(header_increase), .header(header));

  insert_header_axis u_header (
    .clk(eth_clk), .rst(eth_rst), .header_in(header), .header_increase(header_increase),
    .s_tdata(dt_tdata), .s_tlast(dt_tlast), .s_tvalid(dt_tvalid), .s_tready(dt_tready),
    .m_tdata(ih_tdata), .m_tkeep(ih_tkeep), .m_tlast(ih_tlast), .m_tvalid(ih_tvalid),
    .m_tready(ih_tready));

  axis_pause u_pause (
    .clk(eth_clk), .rst(eth_rst), .pause_count(pause_count),
    .s_tdata(ih_tdata), .s_tkeep(ih_tkeep), .s_tlast(ih_tlast), .s_tvalid(ih_tvalid),
    .s_tready(ih_tready),
    .m_tdata(m_eth_tdata), .m_tkeep(m_eth_tkeep), .m_tlast(m_eth_tlast),
    .m_tvalid(m_eth_tvalid), .m_tready(m_eth_tready));

  // ---------------- registers ----------------
  mmio_regs #(.N(N_STREAMS_P)) u_regs (
    .clk(eth_clk), .rst(eth_rst),
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid),
    .s_rready(s_axil_rready),
    .arm(arm_e), .tx_enable(tx_enable_e), .shift_count(shift_e), .pause_count(pause_count),
    .data_valid(data_valid_e), .tid(tid), .dest_ip(dest_ip), .dest_port(dest_port));
endmodule
