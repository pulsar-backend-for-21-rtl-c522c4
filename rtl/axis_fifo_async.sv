// axis_fifo_async: dual-clock AXI-Stream FIFO in packet mode, DEPTH words of W bits.
//
// It carries one stream from the ADC AXI-Stream clock (s_clk) to the Ethernet clock
// (m_clk). Pointers cross the clock boundary in Gray code through two-flop
// synchronisers. The read side is shown only the write pointer as it stood after the
// last word with tlast, so a packet appears at the output only once it is completely
// inside: the switch behind it then never stalls in mid-packet waiting for data. This
// is why DEPTH must hold at least one whole packet (64 words); a longer packet would
// never be released. tlast must be bit LAST_BIT of the word. The array is read
// through a registered port (the form block RAM supports) into an output register that
// is refilled in the cycle its word is taken, so a released packet flows out at one
// word per m_clk cycle; the output register holds one word beyond the DEPTH of the
// array.
//
// Interface: s_clk/s_rst with s_*, m_clk/m_rst with m_*. Timing: the first word of a
// completed packet is presented about four m_clk edges after its tlast word is written;
// freed space becomes visible to the writer about three s_clk edges after a word leaves
// the array. Clock crossing and the whole-packet requirement follow the paper;
// packet-mode release, Gray pointers, the registered read and DEPTH are this design's
// choices. DEPTH must be a power of two.
module axis_fifo_async #(
  parameter int unsigned W        = 516,
  parameter int unsigned DEPTH    = 128,
  parameter int unsigned LAST_BIT = 512
) (
  input  logic         s_clk,
  input  logic         s_rst,
  input  logic [W-1:0] s_tdata,
  input  logic         s_tvalid,
  output logic         s_tready,
  input  logic         m_clk,
  input  logic         m_rst,
  output logic [W-1:0] m_tdata,
  output logic         m_tvalid,
  input  logic         m_tready
);
  localparam int unsigned AW = $clog2(DEPTH);

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wr_ptr, wr_commit_gray;
  logic [AW:0] rd_gray_s1, rd_gray_s2, rd_ptr_w;
  logic        do_wr;
  logic [AW:0] rd_ptr, rd_gray;
  logic [AW:0] wr_gray_s1, wr_gray_s2, wr_commit_r;
  logic        do_rd, q_valid;

  // write side

  assign rd_ptr_w = gray2bin(rd_gray_s2);
  assign s_tready = ((wr_ptr - rd_ptr_w) != (AW+1)'(DEPTH));
  assign do_wr    = s_tvalid && s_tready;

  always_ff @(posedge s_clk)
    if (do_wr) mem[wr_ptr[AW-1:0]] <= s_tdata;

  always_ff @(posedge s_clk) begin
    if (s_rst) begin
      wr_ptr         <= '0;
      wr_commit_gray <= '0;
      rd_gray_s1     <= '0;
      rd_gray_s2     <= '0;
    end else begin
      rd_gray_s1 <= rd_gray;
      rd_gray_s2 <= rd_gray_s1;
      if (do_wr) begin
        wr_ptr <= wr_ptr + 1'b1;
        if (s_tdata[LAST_BIT]) begin
          wr_commit_gray <= bin2gray(wr_ptr + 1'b1);
        end
      end
    end
  end

  // read side

  // registered read into an output register, refilled in the cycle its word is taken
  assign wr_commit_r = gray2bin(wr_gray_s2);
  assign do_rd       = (wr_commit_r != rd_ptr) && (!q_valid || m_tready);
  assign m_tvalid    = q_valid;

  always_ff @(posedge m_clk)
    if (do_rd) m_tdata <= mem[rd_ptr[AW-1:0]];

  always_ff @(posedge m_clk) begin
    if (m_rst) begin
      rd_ptr     <= '0;
      rd_gray    <= '0;
      wr_gray_s1 <= '0;
      wr_gray_s2 <= '0;
      q_valid    <= 1'b0;
    end else begin
      wr_gray_s1 <= wr_commit_gray;
      wr_gray_s2 <= wr_gray_s1;
      if (do_rd) begin
        rd_ptr  <= rd_ptr + 1'b1;
        rd_gray <= bin2gray(rd_ptr + 1'b1);
      end
      if (do_rd)         q_valid <= 1'b1;
      else if (m_tready) q_valid <= 1'b0;
    end
  end
endmodule
