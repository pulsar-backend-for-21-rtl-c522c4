// packet_counter: one 64-bit packet counter per stream, the first field of every UDP
// payload.
//
// header shows the counter of the stream selected by tid; a pulse on increase advances
// that counter by one. clear sets all counters to zero; the top pulses it when a
// capture is armed, so counter 0 is the first packet of each stream after a capture is
// started (packets still draining from the previous capture keep their numbers, since
// the clear comes before the new 1PPS start); because every board
// starts on the same 1PPS edge, equal counters on different boards carry samples of
// the same instant.
//
// Interface: clk, rst, clear, tid, increase -> header. Timing: header is combinational
// from tid; an increase takes effect at the next clock edge. The 64-bit counter is the
// paper's; keeping one counter per stream outside the header inserter and clearing
// them at arm are this design's choices.
module packet_counter
  import pb_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clear,
  input  logic [TID_W-1:0] tid,
  input  logic             increase,
  output logic [HDR_W-1:0] header
);
  logic [HDR_W-1:0] cnt [N];

  assign header = cnt[tid];

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      for (int i = 0; i < N; i++) cnt[i] <= '0;
    end else if (increase) begin
      cnt[tid] <= cnt[tid] + 1'b1;
    end
  end
endmodule
