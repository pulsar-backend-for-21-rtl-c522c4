// Test of axis_pause: packets of random length at full rate; after every tlast transfer
// the output must stay idle for exactly pause_count cycles (several values including 0),
// and data pass unchanged.
module tb_axis_pause;
  logic clk = 0, rst = 1;
  logic [7:0] pause = 0;
  logic [511:0] s_tdata = '0, m_tdata;
  logic [63:0] s_tkeep = '1, m_tkeep;
  logic s_tlast = 0, s_tvalid = 0, s_tready, m_tlast, m_tvalid, m_tready = 1;
  int checks = 0, failures = 0, n_gaps = 0;
  int idle = 0, after_last = 0, n = 0, exp_gap = 0;

  axis_pause dut (.clk(clk), .rst(rst), .pause_count(pause), .s_tdata(s_tdata), .s_tkeep(s_tkeep),
    .s_tlast(s_tlast), .s_tvalid(s_tvalid), .s_tready(s_tready), .m_tdata(m_tdata), .m_tkeep(m_tkeep),
    .m_tlast(m_tlast), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (m_tvalid && m_tready) begin
      checks++;
      if (m_tdata[31:0] != 32'(n)) begin failures++; $display("FAIL data %0d", n); end
      n++;
      if (after_last) begin
        checks++; n_gaps++;
        if (idle != exp_gap) begin failures++; $display("FAIL gap %0d exp %0d", idle, exp_gap); end
      end
      after_last = m_tlast;
      if (m_tlast) exp_gap = int'(pause);
      idle = 0;
    end else if (after_last) idle++;
  end

  initial begin
    int len;
    repeat (3) @(negedge clk);
    rst = 0;
    s_tvalid = 1;
    for (int p = 0; p < 40; p++) begin
      pause = 8'((p / 5) * 3);   // 0, 3, 6, ... 21
      len = 1 + ($urandom % 10);
      for (int w = 0; w < len; w++) begin
        s_tlast = (w == len - 1);
        s_tdata[31:0] = s_tdata[31:0];
        do @(posedge clk); while (!s_tready);
        @(negedge clk);
        s_tdata[31:0] = s_tdata[31:0] + 1;
      end
    end
    s_tvalid = 0;
    checks++;
    if (n_gaps < 35) begin failures++; $display("FAIL gaps %0d", n_gaps); end
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
