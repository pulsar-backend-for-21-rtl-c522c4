// axis_pass: lets an AXI-Stream through or discards it, under control of pass, in
// whole frames.
//
// Forwarded beats are counted in frames of FRAME_BEATS beats (512 beats of 64 bits = one
// UDP payload of 4096 samples). While the gate is closed, pass is looked at on every
// beat and the gate opens on the first beat that sees it high, which starts a frame;
// once open, pass is looked at again only at the next frame boundary, so a frame is
// always forwarded whole. While the gate is closed, input beats
// are still accepted (s_tready high) and dropped, since the data converter upstream
// never waits. In the firmware pass comes from the 1PPS start trigger, so a stream starts
// with the first beat after the 1PPS edge, and a stream that is stopped always ends on
// a frame boundary, leaving no partial packet behind in the FIFOs.
//
// Interface: clk, rst, pass, AXI-Stream in/out of DATA_W bits, no tlast (none exists
// this early in the stream). Timing: one beat per cycle through one register stage.
// Gating on the 1PPS trigger is the paper's; consuming dropped beats and deciding per
// frame (FRAME_BEATS = 1 gives per-beat gating) are this design's choices.
module axis_pass #(
  parameter int unsigned DATA_W      = 64,
  parameter int unsigned FRAME_BEATS = 512
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              pass,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready
);
  localparam int unsigned CW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1;

  logic [CW-1:0] cnt;        // beat number within the current frame
  logic          open_q;     // gate state of the current frame
  logic          open_now;   // gate state for the beat at the input
  logic          out_free;

  assign open_now = (cnt == '0) ? pass : open_q;
  assign out_free = !m_tvalid || m_tready;
  assign s_tready = out_free || !open_now;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt    <= '0;
      open_q <= 1'b0;
    end else if (s_tvalid && s_tready) begin
      open_q <= open_now;
      if (open_now) cnt <= (cnt == CW'(FRAME_BEATS - 1)) ? '0 : cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
    end else if (out_free) begin
      m_tvalid <= s_tvalid && open_now;
      if (s_tvalid && open_now) m_tdata <= s_tdata;
    end
  end
endmodule
