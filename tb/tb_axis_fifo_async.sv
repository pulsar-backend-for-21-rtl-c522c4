// Test of axis_fifo_async at its default size (128 words) between a 100 MHz write clock
// and a 160 MHz read clock: packets of random length cross in order; a packet is not
// shown at the output before its tlast word has been written; with the reader stopped
// the writer is stopped after exactly DEPTH words.
module tb_axis_fifo_async;
  localparam int DEPTH = 128, LAST = 512;
  logic s_clk = 0, m_clk = 0, s_rst = 1, m_rst = 1;
  logic [515:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, got = 0, pk_in = 0, pk_out = 0;
  logic [515:0] q [$];

  axis_fifo_async dut (.s_clk(s_clk), .s_rst(s_rst), .s_tdata(s_tdata), .s_tvalid(s_tvalid),
    .s_tready(s_tready), .m_clk(m_clk), .m_rst(m_rst), .m_tdata(m_tdata), .m_tvalid(m_tvalid),
    .m_tready(m_tready));
  always #5 s_clk = ~s_clk;
  always #3.1 m_clk = ~m_clk;

  always @(posedge s_clk) if (!s_rst && s_tvalid && s_tready) begin
    q.push_back(s_tdata);
    if (s_tdata[LAST]) pk_in++;
  end
  always @(posedge m_clk) if (!m_rst) begin
    if (m_tvalid) begin
      checks++;
      if (pk_out >= pk_in) begin failures++; $display("FAIL data shown before its packet was complete"); end
    end
    if (m_tvalid && m_tready) begin
      checks++; got++;
      if (q.size() == 0 || m_tdata !== q.pop_front()) begin failures++; $display("FAIL word %0d", got); end
      if (m_tdata[LAST]) pk_out++;
    end
  end

  initial begin
    int len;
    repeat (4) @(negedge s_clk);
    s_rst = 0; m_rst = 0;
    fork
      begin // writer: 40 packets of 1..64 words
        for (int p = 0; p < 40; p++) begin
          len = 1 + ($urandom % 64);
          for (int w = 0; w < len; w++) begin
            @(negedge s_clk);
            while ($urandom % 4 == 0) @(negedge s_clk);
            s_tvalid = 1;
            s_tdata = {3'(p), 1'(w == len - 1), {15{32'($urandom)}}, 32'(w)};
            do @(posedge s_clk); while (!s_tready);
            @(negedge s_clk) s_tvalid = 0;
          end
          // hold the last packet's words for a while with no tlast following: the reader
          // must see nothing of a new packet until its tlast
        end
      end
      begin
        repeat (30000) begin
          @(negedge m_clk);
          m_tready = ($urandom % 3) != 0;
        end
      end
    join_any
    m_tready = 1;
    repeat (400) @(negedge m_clk);
    checks++;
    if (pk_out != 40 || q.size() != 0) begin failures++; $display("FAIL packets out %0d", pk_out); end
    // full: reader stopped, writer sends words without tlast
    m_tready = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge s_clk);
      s_tvalid = 1; s_tdata = 516'(i);
      #1;
      checks++;
      if (!s_tready) begin failures++; $display("FAIL full early at %0d", i); end
    end
    @(negedge s_clk);
    checks++;
    if (s_tready) begin failures++; $display("FAIL not full after DEPTH"); end
    checks++;
    if (m_tvalid) begin failures++; $display("FAIL incomplete packet shown"); end
    s_tvalid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
