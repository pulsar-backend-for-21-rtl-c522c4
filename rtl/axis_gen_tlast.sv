// axis_gen_tlast: marks every BEATS-th transfer of an AXI-Stream with tlast.
//
// A counter advances on each completed transfer (valid and ready) and tlast is set on
// the transfer at which it reaches BEATS-1; the stream is thereby cut into frames of
// BEATS beats, each of which becomes one UDP payload (64 x 64 bytes = 4096 samples).
// The stream itself passes straight through.
//
// Interface: AXI-Stream in/out of DATA_W bits; m_tlast is added. Timing: no latency,
// combinational pass-through of valid, ready and data. The frame length is the paper's;
// the pass-through structure is this design's choice.
module axis_gen_tlast #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned BEATS  = 64
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  output logic              m_tlast,
  input  logic              m_tready
);
  localparam int unsigned CW = (BEATS > 1) ? $clog2(BEATS) : 1;
  logic [CW-1:0] cnt;

  assign m_tdata  = s_tdata;
  assign m_tvalid = s_tvalid;
  assign s_tready = m_tready;
  assign m_tlast  = (cnt == CW'(BEATS-1));

  always_ff @(posedge clk) begin
    if (rst)                      cnt <= '0;
    else if (s_tvalid && m_tready) cnt <= m_tlast ? '0 : cnt + 1'b1;
  end
endmodule
