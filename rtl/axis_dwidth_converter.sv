// axis_dwidth_converter: packs RATIO consecutive IN_W-bit AXI-Stream beats into one
// IN_W*RATIO-bit beat (64 -> 512 bits by default).
//
// The first input beat lands in the lowest bits of the output, as a little-endian
// up-sizer does, so the byte order of the samples is kept. Input beats are collected
// in a shift register; when the last one arrives the wide beat is presented and held
// until taken. The firmware uses a vendor width converter set up this way; this is an
// equivalent written from that setting.
//
// Interface: AXI-Stream in (s_*) and out (m_*), no tlast. Timing: accepts one beat per
// cycle while the output is free or being taken; output valid one cycle after the
// RATIO-th input beat.
module axis_dwidth_converter #(
  parameter int unsigned IN_W  = 64,
  parameter int unsigned RATIO = 8
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [IN_W-1:0]       s_tdata,
  input  logic                  s_tvalid,
  output logic                  s_tready,
  output logic [IN_W*RATIO-1:0] m_tdata,
  output logic                  m_tvalid,
  input  logic                  m_tready
);
  localparam int unsigned CW = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [IN_W*(RATIO-1)-1:0] acc;
  logic [CW-1:0]         cnt;
  logic                  out_free;

  assign out_free = !m_tvalid || m_tready;
  assign s_tready = out_free;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt      <= '0;
      acc      <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
    end else begin
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (s_tvalid && s_tready) begin
        if (cnt != CW'(RATIO-1)) acc[cnt*IN_W +: IN_W] <= s_tdata;
        if (cnt == CW'(RATIO-1)) begin
          cnt      <= '0;
          m_tvalid <= 1'b1;
          m_tdata  <= {s_tdata, acc};
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
