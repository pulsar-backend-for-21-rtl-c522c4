// packed_scale_signed_int_axis: turns each AXI-Stream beat of N_SAMPLES signed IN_W-bit
// ADC samples into N_SAMPLES signed OUT_W-bit samples, the sample format of the UDP
// payload.
//
// Each sample is shifted right arithmetically by shift_count bits and then saturated
// to the OUT_W-bit range, so a run-time shift chooses which bits of the converter's
// output are kept and overload clips instead of wrapping. Sample k sits in bits
// [k*IN_W +: IN_W] at the input and [k*OUT_W +: OUT_W] at the output.
//
// Interface: AXI-Stream in (s_*) and out (m_*), one register stage; shift_count is
// quasi-static. Timing: one beat per cycle, one cycle latency.
// The 16-to-8-bit conversion is the paper's; shift-then-saturate and truncation
// (no rounding) are this design's choices.
module packed_scale_signed_int_axis #(
  parameter int unsigned N_SAMPLES = 8,
  parameter int unsigned IN_W      = 16,
  parameter int unsigned OUT_W     = 8
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [3:0]                  shift_count,
  input  logic [N_SAMPLES*IN_W-1:0]   s_tdata,
  input  logic                        s_tvalid,
  output logic                        s_tready,
  output logic [N_SAMPLES*OUT_W-1:0]  m_tdata,
  output logic                        m_tvalid,
  input  logic                        m_tready
);
  localparam logic signed [IN_W-1:0] MAX_OUT = IN_W'(2**(OUT_W-1) - 1);
  localparam logic signed [IN_W-1:0] MIN_OUT = -IN_W'(2**(OUT_W-1));

  logic [N_SAMPLES*OUT_W-1:0] scaled;

  always_comb begin
    for (int k = 0; k < N_SAMPLES; k++) begin
      logic signed [IN_W-1:0] s;
      s = $signed(s_tdata[k*IN_W +: IN_W]) >>> shift_count;
      if (s > MAX_OUT)      scaled[k*OUT_W +: OUT_W] = MAX_OUT[OUT_W-1:0];
      else if (s < MIN_OUT) scaled[k*OUT_W +: OUT_W] = MIN_OUT[OUT_W-1:0];
      else                  scaled[k*OUT_W +: OUT_W] = s[OUT_W-1:0];
    end
  end

  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) m_tdata <= scaled;
    end
  end
endmodule
