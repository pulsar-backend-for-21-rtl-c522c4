// Test of axis_fifo_sync at its default size (1024 words of 516 bits): random traffic
// keeps order; filling it shows s_tready falling after exactly DEPTH words; a written
// word is presented two cycles after it was written (registered RAM read).
module tb_axis_fifo_sync;
  localparam int DEPTH = 1024;
  logic clk = 0, rst = 1;
  logic [515:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, got = 0, n_in = 0;
  logic [515:0] q [$];

  axis_fifo_sync dut (.clk(clk), .rst(rst), .s_tdata(s_tdata), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_tdata(m_tdata), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (s_tvalid && s_tready) begin q.push_back(s_tdata); n_in++; end
    if (m_tvalid && m_tready) begin
      checks++; got++;
      if (q.size() == 0 || m_tdata !== q.pop_front()) begin failures++; $display("FAIL word %0d", got); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // latency: one word in, presented after the second clock edge, not the first
    s_tvalid = 1; s_tdata = {16{32'h1234_5678}};
    @(negedge clk) s_tvalid = 0;
    checks++;
    if (m_tvalid) begin failures++; $display("FAIL latency: presented too early"); end
    @(negedge clk);
    checks++;
    if (!m_tvalid) begin failures++; $display("FAIL latency"); end
    m_tready = 1; @(negedge clk); m_tready = 0;
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      m_tready = ($urandom % 3) != 0;
      s_tvalid = ($urandom % 3) != 0;
      s_tdata  = {16{32'($urandom)}};
    end
    // drain, then fill to full
    s_tvalid = 0; m_tready = 1;
    repeat (DEPTH + 5) @(negedge clk);
    m_tready = 0;
    for (int i = 0; i < DEPTH; i++) begin
      s_tvalid = 1; s_tdata = 516'(i);
      checks++;
      if (!s_tready) begin failures++; $display("FAIL full early at %0d", i); end
      @(negedge clk);
    end
    checks++;
    if (s_tready) begin failures++; $display("FAIL not full after DEPTH"); end
    s_tvalid = 0; m_tready = 1;
    repeat (DEPTH + 5) @(negedge clk);
    checks++;
    if (q.size() != 0 || m_tvalid) begin failures++; $display("FAIL drain"); end
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
