// Test of axis_gen_tlast: with random gaps and back-pressure, tlast must be set on
// transfers 64, 128, ... and on no other; data passes unchanged.
module tb_axis_gen_tlast;
  logic clk = 0, rst = 1;
  logic [511:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tlast, m_tready = 0;
  int checks = 0, failures = 0, n = 0, n_last = 0;

  axis_gen_tlast dut (.clk(clk), .rst(rst), .s_tdata(s_tdata), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_tdata(m_tdata), .m_tvalid(m_tvalid), .m_tlast(m_tlast), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    n++;
    checks += 2;
    if (m_tlast !== ((n % 64) == 0)) begin failures++; $display("FAIL tlast at transfer %0d", n); end
    if (m_tdata[31:0] !== 32'(n)) begin failures++; $display("FAIL data at transfer %0d", n); end
    if (m_tlast) n_last++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 1200; i++) begin
      @(negedge clk);
      if (s_tvalid && s_tready) s_tdata[31:0] = s_tdata[31:0] + 1;
      if (s_tdata[31:0] == 0) s_tdata[31:0] = 1;
      m_tready = ($urandom % 4) != 0;
      s_tvalid = ($urandom % 5) != 0;
    end
    s_tvalid = 0;
    checks++;
    if (n_last < 8) begin failures++; $display("FAIL only %0d frames", n_last); end
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
