// Test of insert_header_axis: 64-beat packets of random bytes with random gaps and
// back-pressure. Each packet must come out as 65 beats whose bytes, in order, are the
// 8-byte header (least significant byte first) followed by the 4096 input bytes; only
// the last beat has tlast and tkeep = 0xFF; header_increase pulses once per packet.
// With no stalls a packet takes exactly 65 cycles.
module tb_insert_header_axis;
  logic clk = 0, rst = 1;
  logic [63:0] header = 0;
  logic hinc;
  logic [511:0] s_tdata = '0, m_tdata;
  logic [63:0] m_tkeep;
  logic s_tlast = 0, s_tvalid = 0, s_tready, m_tlast, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, n_inc = 0, pkts_out = 0;
  byte unsigned exp_q [$];
  bit stalls = 1;

  insert_header_axis dut (.clk(clk), .rst(rst), .header_in(header), .header_increase(hinc),
    .s_tdata(s_tdata), .s_tlast(s_tlast), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_tdata(m_tdata), .m_tkeep(m_tkeep), .m_tlast(m_tlast), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  int out_beat = 0;
  always @(posedge clk) if (!rst) begin
    if (hinc) n_inc++;
    if (m_tvalid && m_tready) begin
      int nb;
      nb = m_tlast ? 8 : 64;
      checks += 2;
      if (m_tlast !== (out_beat == 64)) begin failures++; $display("FAIL tlast at beat %0d", out_beat); end
      if (m_tkeep !== (m_tlast ? 64'hFF : '1)) begin failures++; $display("FAIL tkeep"); end
      for (int b = 0; b < nb; b++) begin
        checks++;
        if (exp_q.size() == 0 || m_tdata[b*8 +: 8] !== exp_q.pop_front()) begin
          failures++; if (failures < 10) $display("FAIL byte %0d of beat %0d", b, out_beat);
        end
      end
      out_beat = m_tlast ? 0 : out_beat + 1;
      if (m_tlast) pkts_out++;
    end
  end

  task automatic send_packet(input logic [63:0] hdr);
    for (int w = 0; w < 64; w++) begin
      @(negedge clk);
      s_tvalid = 0;
      if (stalls) while ($urandom % 5 == 0) @(negedge clk);
      s_tvalid = 1; s_tlast = (w == 63);
      for (int k = 0; k < 16; k++) s_tdata[k*32 +: 32] = $urandom;
      if (w == 0) begin
        header = hdr;
        for (int b = 0; b < 8; b++) exp_q.push_back(hdr[b*8 +: 8]);
      end
      for (int b = 0; b < 64; b++) exp_q.push_back(s_tdata[b*8 +: 8]);
      do @(posedge clk); while (!s_tready);
    end
    @(negedge clk) s_tvalid = 0;
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst = 0;
    fork
      begin
        for (int p = 0; p < 6; p++) send_packet(64'h0102_0304_0506_0700 + 64'(p));
      end
      begin
        repeat (1500) begin @(negedge clk); m_tready = ($urandom % 3) != 0; end
      end
    join_any
    disable fork;
    m_tready = 1;
    repeat (100) @(negedge clk);
    // no stalls: 65 cycles per packet
    stalls = 0;
    t0 = $time;
    send_packet(64'hDEAD_BEEF_0000_0001);
    wait (pkts_out == 7);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 65) begin failures++; $display("FAIL packet took %0d cycles", (t1 - t0) / 10); end
    repeat (3) @(negedge clk);
    checks += 2;
    if (pkts_out != 7 || n_inc != 7) begin failures++; $display("FAIL counts %0d %0d", pkts_out, n_inc); end
    if (exp_q.size() != 0) begin failures++; $display("FAIL bytes left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
