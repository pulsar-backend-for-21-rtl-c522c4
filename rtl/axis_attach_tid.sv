// axis_attach_tid: tags an AXI-Stream with the number of the stream it carries.
//
// The stream number id is registered together with each beat and leaves as tid, so
// that after the eight streams are merged by the switch every packet still says which
// ADC it came from.
//
// Interface: clk, rst, id (quasi-static), AXI-Stream in with tlast, out with tlast and
// tid. Timing: one register stage, one beat per cycle. Attaching the id as tid is the
// paper's; the register stage is this design's choice.
module axis_attach_tid #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned TID_W  = 3
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [TID_W-1:0]  id,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tlast,
  output logic [TID_W-1:0]  m_tid,
  output logic              m_tvalid,
  input  logic              m_tready
);
  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
      m_tid    <= '0;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) begin
        m_tdata <= s_tdata;
        m_tlast <= s_tlast;
        m_tid   <= id;
      end
    end
  end
endmodule
