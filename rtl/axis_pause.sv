// axis_pause: holds the stream still for pause_count clock cycles after every packet.
//
// The pause gives the 100 GbE block time to drain its internal buffer between packets
// and so avoids overflowing it. After a transfer with tlast, a down-counter is loaded
// with pause_count; while it is not zero, m_tvalid and s_tready are forced low.
//
// Interface: clk, rst, pause_count (quasi-static), AXI-Stream in/out with tkeep and
// tlast. Timing: no latency; exactly pause_count idle cycles follow each tlast transfer
// (none for 0). The pause after each packet is the paper's; its exact length rule is
// this design's choice.
module axis_pause
  import pb_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [7:0]        pause_count,
  input  logic [WIDE_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [WIDE_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready
);
  logic [7:0] cnt;
  logic       pausing;

  assign pausing  = (cnt != '0);
  assign m_tdata  = s_tdata;
  assign m_tkeep  = s_tkeep;
  assign m_tlast  = s_tlast;
  assign m_tvalid = s_tvalid && !pausing;
  assign s_tready = m_tready && !pausing;

  always_ff @(posedge clk) begin
    if (rst)                                  cnt <= '0;
    else if (m_tvalid && m_tready && s_tlast) cnt <= pause_count;
    else if (pausing)                         cnt <= cnt - 1'b1;
  end
endmodule
