// insert_header_axis: puts the 8-byte packet counter in front of each payload.
//
// The UDP payload is the 64-bit counter followed by 4096 samples, so the whole packet
// is shifted by eight bytes: output beat 0 is the counter in bytes 0-7 and input beat 0
// bytes 0-55 in bytes 8-63; every further output beat k is the last eight bytes of
// input beat k-1 followed by the first 56 bytes of input beat k. After the input beat
// with tlast, one extra beat carries the last eight bytes, with tkeep = 0xFF and tlast.
// A 64-beat input packet thus leaves as 65 beats (4104 bytes). header_in is sampled
// when the first beat of a packet is accepted, and header_increase pulses when the
// extra beat is accepted.
//
// Interface: s_* (512-bit, tlast), header_in; m_* (512-bit, tkeep, tlast),
// header_increase. Timing: no latency; the input is stalled for the one extra cycle
// per packet. Putting a 64-bit counter first is the paper's; the counter's byte order
// (least significant byte first) and the shift-by-eight packing are this design's
// choices.
module insert_header_axis
  import pb_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [HDR_W-1:0]  header_in,
  output logic              header_increase,
  input  logic [WIDE_W-1:0] s_tdata,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  output logic [WIDE_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready
);
  localparam int unsigned CW = HDR_W;          // bits carried to the next beat

  typedef enum logic [1:0] {FIRST, BODY, TAIL} state_t;
  state_t          state;
  logic [CW-1:0]   carry;

  always_comb begin
    m_tkeep = '1;
    m_tlast = 1'b0;
    unique case (state)
      FIRST: begin
        m_tdata  = {s_tdata[WIDE_W-CW-1:0], header_in};
        m_tvalid = s_tvalid;
        s_tready = m_tready;
      end
      BODY: begin
        m_tdata  = {s_tdata[WIDE_W-CW-1:0], carry};
        m_tvalid = s_tvalid;
        s_tready = m_tready;
      end
      default: begin // TAIL
        m_tdata  = {{(WIDE_W-CW){1'b0}}, carry};
        m_tkeep  = {{(KEEP_W-CW/8){1'b0}}, {(CW/8){1'b1}}};
        m_tlast  = 1'b1;
        m_tvalid = 1'b1;
        s_tready = 1'b0;
      end
    endcase
  end

  assign header_increase = (state == TAIL) && m_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= FIRST;
      carry <= '0;
    end else begin
      if (s_tvalid && s_tready) begin
        carry <= s_tdata[WIDE_W-1 -: CW];
        state <= s_tlast ? TAIL : BODY;
      end else if (state == TAIL && m_tready) begin
        state <= FIRST;
      end
    end
  end
endmodule
