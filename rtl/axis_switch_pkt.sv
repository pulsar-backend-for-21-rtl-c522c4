// axis_switch_pkt: N-to-1 AXI-Stream switch in packet mode.
//
// All streams of a board share one Ethernet port, so their packets have to take turns.
// When idle, the switch grants the first input with data, searching round-robin from
// the input after the one served last. The grant is then held until the transfer that
// carries tlast, so packets are never interleaved. The granted input is connected
// straight through to the output.
//
// Interface: s_beat[N] (tid, tlast, data), s_tvalid[N], s_tready[N]; m_beat, m_tvalid,
// m_tready. Timing: one idle cycle for arbitration between packets, then one beat per
// cycle; an input waits at most N-1 packets. Packet-mode switching is the paper's;
// round-robin order and the arbitration cycle are this design's choices, in place of
// the vendor switch used by the firmware.
module axis_switch_pkt
  import pb_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  wide_beat_t  s_beat   [N],
  input  logic [N-1:0] s_tvalid,
  output logic [N-1:0] s_tready,
  output wide_beat_t  m_beat,
  output logic        m_tvalid,
  input  logic        m_tready
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy;
  logic [IW-1:0] grant, last;
  logic [IW-1:0] next_idx;
  logic          next_found;

  // round-robin search starting after the last served input
  always_comb begin
    next_idx   = '0;
    next_found = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [IW-1:0] c;
      c = IW'((int'(last) + k) % N);
      if (!next_found && s_tvalid[c]) begin
        next_idx   = c;
        next_found = 1'b1;
      end
    end
  end

  always_comb begin
    s_tready = '0;
    m_beat   = s_beat[grant];
    m_tvalid = busy && s_tvalid[grant];
    if (busy) s_tready[grant] = m_tready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      grant <= '0;
      last  <= IW'(N - 1);
    end else if (!busy) begin
      if (next_found) begin
        busy  <= 1'b1;
        grant <= next_idx;
      end
    end else if (m_tvalid && m_tready && m_beat.tlast) begin
      busy <= 1'b0;
      last <= grant;
    end
  end

  // Packet mode: the output only changes source after a tlast transfer.
  a_no_switch_midpacket: assert property (@(posedge clk) disable iff (rst)
    (busy && !(m_tvalid && m_tready && m_beat.tlast)) |=> (busy && $stable(grant)));
endmodule
