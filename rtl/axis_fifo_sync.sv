// axis_fifo_sync: single-clock AXI-Stream FIFO of DEPTH words of W bits.
//
// It caches the packets of one stream ahead of the clock-crossing FIFO, so that a
// stream keeps flowing while the switch serves the other seven; the firmware places it
// in UltraRAM. The storage is an array with one write port and one registered read
// port (read enable, no read-during-write on the same word), the form that large RAM
// blocks such as UltraRAM or block RAM support. A register behind the read port holds
// the word presented on m_tdata; it is refilled from the array in the same cycle the
// word it holds is taken, so the FIFO moves one word per cycle. The payload is opaque
// here: tdata, tlast and tid are packed into one word by the user.
//
// Interface: s_* in, m_* out. Timing: a word written at one clock edge is loaded into
// the output register at the next and presented from then on (two cycles from input to
// output); one write and one read per cycle; s_tready is low only when DEPTH words are
// held (array plus output register). Registered read is this design's choice for RAM
// mapping; DEPTH is this design's choice too (the paper gives none) and must be a power
// of two.
module axis_fifo_sync #(
  parameter int unsigned W     = 516,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [W-1:0]             s_tdata,
  input  logic                     s_tvalid,
  output logic                     s_tready,
  output logic [W-1:0]             m_tdata,
  output logic                     m_tvalid,
  input  logic                     m_tready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr;
  logic [AW:0]   level;      // words in the array
  logic          q_valid;    // output register holds a word
  logic          do_wr, load;

  assign level    = wr_ptr - rd_ptr;
  assign s_tready = ((level + (AW+1)'(q_valid)) < (AW+1)'(DEPTH));
  assign do_wr    = s_tvalid && s_tready;
  assign load     = (level != '0) && (!q_valid || m_tready);
  assign m_tvalid = q_valid;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr[AW-1:0]] <= s_tdata;
    if (load)  m_tdata <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr  <= '0;
      rd_ptr  <= '0;
      q_valid <= 1'b0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (load)  rd_ptr <= rd_ptr + 1'b1;
      if (load)          q_valid <= 1'b1;
      else if (m_tready) q_valid <= 1'b0;
    end
  end

  // AXI-Stream rule: a presented word stays until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst) (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata));
  endproperty
  a_hold: assert property (p_hold);
endmodule
