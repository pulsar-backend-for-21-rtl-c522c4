// Test of axis_dwidth_converter (64 -> 512 bits): random input timing and back-pressure;
// each output beat must be eight consecutive input beats, the first in bits [63:0].
// At full rate an output beat must appear every eight clocks.
module tb_axis_dwidth_converter;
  logic clk = 0, rst = 1;
  logic [63:0] s_tdata = '0;
  logic [511:0] m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, got = 0, n_in = 0;
  logic [63:0] in_q [$];

  axis_dwidth_converter dut (.clk(clk), .rst(rst), .s_tdata(s_tdata), .s_tvalid(s_tvalid),
    .s_tready(s_tready), .m_tdata(m_tdata), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (s_tvalid && s_tready) begin in_q.push_back(s_tdata); n_in++; end
    if (m_tvalid && m_tready) begin
      logic [511:0] e;
      for (int k = 0; k < 8; k++) e[k*64 +: 64] = in_q.pop_front();
      checks++; got++;
      if (m_tdata !== e) begin failures++; $display("FAIL beat %0d", got); end
    end
  end

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      m_tready = ($urandom % 3) != 0;
      if (!s_tvalid || s_tready) begin
        s_tvalid = ($urandom % 4) != 0;
        s_tdata  = {32'($urandom), 32'(i)};
      end
    end
    // drain: complete the partial group
    @(negedge clk); m_tready = 1;
    while (n_in % 8 != 0) begin s_tvalid = 1; s_tdata = 64'(n_in); @(negedge clk); end
    s_tvalid = 0;
    repeat (3) @(negedge clk);
    // full rate: 80 input beats, 10 outputs, one per 8 clocks
    got = 0; s_tvalid = 1;
    for (int i = 0; i < 80; i++) begin
      s_tdata = {32'hABCD0000, 32'(i)};
      @(negedge clk);
      if (i == 7)  t0 = $time;
      if (i == 79) t1 = $time;
    end
    s_tvalid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (got != 10 || (t1 - t0) != 72 * 10) begin failures++; $display("FAIL rate got %0d dt %0d", got, t1 - t0); end
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
