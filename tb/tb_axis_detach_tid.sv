// Test of axis_detach_tid: tid shows the tid of the packet in flight from its first beat
// on, stays unchanged while the next packet is already offered, and the next packet is
// held back until pkt_done.
module tb_axis_detach_tid;
  import pb_pkg::*;
  logic clk = 0, rst = 1;
  wide_beat_t s_beat = '0;
  logic s_tvalid = 0, s_tready, m_tlast, m_tvalid, m_tready = 1, pkt_done = 0;
  logic [511:0] m_tdata;
  logic [2:0] tid;
  int checks = 0, failures = 0;

  axis_detach_tid dut (.clk(clk), .rst(rst), .s_beat(s_beat), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_tdata(m_tdata), .m_tlast(m_tlast), .m_tvalid(m_tvalid), .m_tready(m_tready),
    .pkt_done(pkt_done), .tid(tid));
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int p = 0; p < 6; p++) begin
      logic [2:0] t;
      t = 3'(p * 3 + 1);
      // packet of 4 beats
      for (int w = 0; w < 4; w++) begin
        s_tvalid = 1; s_beat.tid = t; s_beat.tlast = (w == 3); s_beat.tdata = 512'(p * 16 + w);
        #1;
        check(tid == t, "tid not shown");
        check(m_tvalid && m_tdata == 512'(p * 16 + w) && m_tlast == (w == 3), "data not passed");
        check(s_tready, "not ready inside packet");
        @(negedge clk);
      end
      // next packet offered before pkt_done: blocked, tid unchanged
      s_beat.tid = t + 3'd1; s_beat.tlast = 0;
      repeat (3) begin
        #1;
        check(tid == t, "tid changed before pkt_done");
        check(!m_tvalid && !s_tready, "next packet not held back");
        @(negedge clk);
      end
      s_tvalid = 0;
      pkt_done = 1; @(negedge clk); pkt_done = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
