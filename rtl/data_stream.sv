// data_stream: the path of one ADC stream from the data converter to the switch.
//
// A beat of eight signed 16-bit samples from the converter is scaled to 8 bits,
// gated by pass (the 1PPS start trigger and the stream's enable), widened from
// 64 to 512 bits, cut into 64-beat frames by a tlast on every 64th beat, tagged with
// the stream number ID as tid, cached in a large single-clock FIFO and finally moved to
// the Ethernet clock through a packet-mode dual-clock FIFO. Each frame is the 4096-byte
// payload of one UDP packet.
//
// The converter cannot be stalled: a beat offered while the chain is not ready is lost
// and counted in overflow_cnt. The pass gate opens and closes only between frames of
// 512 input beats, so the width converter and the tlast counter stay aligned with the
// frames: the first frame after the start trigger begins with the first sample the gate
// lets through, and stopping never leaves a partial packet behind.
//
// Interface: adc_clk domain: adc_rst, shift_count, pass, s_adc_tdata/s_adc_tvalid,
// overflow_cnt. eth_clk domain: eth_rst, m_beat (tid, tlast, 512-bit data), m_tvalid,
// m_tready. Timing: at one input beat per clock, a frame leaves the width converter
// every 512 adc_clk cycles. The block order follows the paper's per-stream block
// design; the FIFO depths, frame-wise gating and the overflow counter are this
// design's choices.
module data_stream
  import pb_pkg::*;
#(
  parameter int unsigned          ID          = 0,
  parameter int unsigned          CACHE_DEPTH = 1024,
  parameter int unsigned          CDC_DEPTH   = 128
) (
  input  logic                    adc_clk,
  input  logic                    adc_rst,
  input  logic [3:0]              shift_count,
  input  logic                    pass,
  input  logic [N_SAMPLES*ADC_W-1:0] s_adc_tdata,
  input  logic                    s_adc_tvalid,
  output logic [31:0]             overflow_cnt,
  input  logic                    eth_clk,
  input  logic                    eth_rst,
  output wide_beat_t              m_beat,
  output logic                    m_tvalid,
  input  logic                    m_tready
);
  logic                 sc_tready, sc_tvalid, ps_tready, ps_tvalid;
  logic [NARROW_W-1:0]  sc_tdata, ps_tdata;
  logic                 dw_tready, dw_tvalid;
  logic [WIDE_W-1:0]    dw_tdata, gl_tdata;
  logic                 gl_tvalid, gl_tlast, gl_tready;
  logic                 at_tvalid, at_tready;
  wide_beat_t           at_beat, ca_beat;
  logic                 ca_tvalid, ca_tready;
  logic                 ca_tready_in;

  always_ff @(posedge adc_clk) begin
    if (adc_rst)                        overflow_cnt <= '0;
    else if (s_adc_tvalid && !sc_tready) overflow_cnt <= overflow_cnt + 1'b1;
  end

  packed_scale_signed_int_axis #(.N_SAMPLES(N_SAMPLES), .IN_W(ADC_W), .OUT_W(SMP_W)) u_scale (
    .clk(adc_clk), .rst(adc_rst), .shift_count(shift_count),
    .s_tdata(s_adc_tdata), .s_tvalid(s_adc_tvalid), .s_tready(sc_tready),
    .m_tdata(sc_tdata), .m_tvalid(sc_tvalid), .m_tready(ps_tready));

  axis_pass #(.DATA_W(NARROW_W), .FRAME_BEATS(PKT_BEATS * WIDE_W / NARROW_W)) u_pass (
    .clk(adc_clk), .rst(adc_rst), .pass(pass),
    .s_tdata(sc_tdata), .s_tvalid(sc_tvalid), .s_tready(ps_tready),
    .m_tdata(ps_tdata), .m_tvalid(ps_tvalid), .m_tready(dw_tready));

  axis_dwidth_converter #(.IN_W(NARROW_W), .RATIO(WIDE_W / NARROW_W)) u_dwidth (
    .clk(adc_clk), .rst(adc_rst),
    .s_tdata(ps_tdata), .s_tvalid(ps_tvalid), .s_tready(dw_tready),
    .m_tdata(dw_tdata), .m_tvalid(dw_tvalid), .m_tready(gl_tready));

  axis_gen_tlast #(.DATA_W(WIDE_W), .BEATS(PKT_BEATS)) u_tlast (
    .clk(adc_clk), .rst(adc_rst),
    .s_tdata(dw_tdata), .s_tvalid(dw_tvalid), .s_tready(gl_tready),
    .m_tdata(gl_tdata), .m_tvalid(gl_tvalid), .m_tlast(gl_tlast), .m_tready(at_tready));

  axis_attach_tid #(.DATA_W(WIDE_W), .TID_W(TID_W)) u_tid (
    .clk(adc_clk), .rst(adc_rst), .id(TID_W'(ID)),
    .s_tdata(gl_tdata), .s_tlast(gl_tlast), .s_tvalid(gl_tvalid), .s_tready(at_tready),
    .m_tdata(at_beat.tdata), .m_tlast(at_beat.tlast), .m_tid(at_beat.tid),
    .m_tvalid(at_tvalid), .m_tready(ca_tready_in));

  axis_fifo_sync #(.W(WIDE_BEAT_W), .DEPTH(CACHE_DEPTH)) u_cache (
    .clk(adc_clk), .rst(adc_rst),
    .s_tdata(at_beat), .s_tvalid(at_tvalid), .s_tready(ca_tready_in),
    .m_tdata(ca_beat), .m_tvalid(ca_tvalid), .m_tready(ca_tready));

  axis_fifo_async #(.W(WIDE_BEAT_W), .DEPTH(CDC_DEPTH), .LAST_BIT(WIDE_W)) u_cdc (
    .s_clk(adc_clk), .s_rst(adc_rst),
    .s_tdata(ca_beat), .s_tvalid(ca_tvalid), .s_tready(ca_tready),
    .m_clk(eth_clk), .m_rst(eth_rst),
    .m_tdata(m_beat), .m_tvalid(m_tvalid), .m_tready(m_tready));
endmodule
