// Test of axis_attach_tid: every output beat carries the id that was applied with its
// input beat, together with its data and tlast, in order.
module tb_axis_attach_tid;
  logic clk = 0, rst = 1;
  logic [2:0] id = 0, m_tid;
  logic [511:0] s_tdata = '0, m_tdata;
  logic s_tlast = 0, s_tvalid = 0, s_tready, m_tlast, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, got = 0;
  logic [515:0] q [$];

  axis_attach_tid dut (.clk(clk), .rst(rst), .id(id), .s_tdata(s_tdata), .s_tlast(s_tlast),
    .s_tvalid(s_tvalid), .s_tready(s_tready), .m_tdata(m_tdata), .m_tlast(m_tlast), .m_tid(m_tid),
    .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (s_tvalid && s_tready) q.push_back({id, s_tlast, s_tdata});
    if (m_tvalid && m_tready) begin
      checks++; got++;
      if (q.size() == 0 || {m_tid, m_tlast, m_tdata} !== q.pop_front()) begin failures++; $display("FAIL beat %0d", got); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      m_tready = ($urandom % 3) != 0;
      if (!s_tvalid || s_tready) begin
        s_tvalid = ($urandom % 4) != 0;
        s_tdata  = {16{32'($urandom)}};
        s_tlast  = 1'($urandom);
        id       = 3'(i / 75);
      end
    end
    @(negedge clk) s_tvalid = 0; m_tready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (got < 200 || q.size() != 0) begin failures++; $display("FAIL count %0d", got); end
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
