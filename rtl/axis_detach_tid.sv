// axis_detach_tid: removes the stream number from the merged AXI-Stream and holds it on
// a port for the whole packet.
//
// The register block uses the held tid to pick the destination IP address and UDP port
// of the stream whose packet is going out, and the packet counter uses it to pick the
// stream's counter. A packet is claimed when its first beat is offered: tid then shows
// that beat's tid and keeps it until pkt_done reports that the packet has left the
// header inserter (whose last beat comes one cycle after the input's tlast). Once the
// input beat with tlast has passed, further input is held back until pkt_done, so the
// next packet cannot change tid early.
//
// Interface: s_beat (tid, tlast, data), s_tvalid, s_tready; m_tdata, m_tlast, m_tvalid,
// m_tready; pkt_done; tid. Timing: no latency, combinational pass-through; one idle
// cycle between packets. Detaching tid to select the header fields is the paper's; the
// claim/release rule and pkt_done are this design's choices.
module axis_detach_tid
  import pb_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  wide_beat_t        s_beat,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [WIDE_W-1:0] m_tdata,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  input  logic              pkt_done,
  output logic [TID_W-1:0]  tid
);
  logic             free;        // no packet claimed
  logic             last_passed; // claimed packet's tlast beat has gone through
  logic [TID_W-1:0] tid_q;

  assign m_tdata  = s_beat.tdata;
  assign m_tlast  = s_beat.tlast;
  assign m_tvalid = s_tvalid && !last_passed;
  assign s_tready = m_tready && !last_passed;
  assign tid      = free ? s_beat.tid : tid_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      free        <= 1'b1;
      last_passed <= 1'b0;
      tid_q       <= '0;
    end else begin
      if (free && s_tvalid) begin
        free  <= 1'b0;
        tid_q <= s_beat.tid;
      end
      if (s_tvalid && s_tready && s_beat.tlast) last_passed <= 1'b1;
      if (pkt_done) begin
        free        <= 1'b1;
        last_passed <= 1'b0;
      end
    end
  end
endmodule
