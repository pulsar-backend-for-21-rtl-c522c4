// Test of axis_pass with its default frame of 512 beats: pass toggles at random points
// while random beats arrive under random back-pressure. The gate must open on the first
// beat that sees pass high and close only after a whole frame; the output carries
// exactly those beats, in order; beats offered while the gate is closed are accepted.
module tb_axis_pass;
  localparam int FRAME = 512;
  logic clk = 0, rst = 1, pass = 0;
  logic [63:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, n_pass = 0, n_drop = 0, got = 0;
  int in_cnt = 0;        // accepted input beats
  bit frame_open = 0;
  logic [63:0] exp_q [$];

  axis_pass dut (.clk(clk), .rst(rst), .pass(pass), .s_tdata(s_tdata), .s_tvalid(s_tvalid),
    .s_tready(s_tready), .m_tdata(m_tdata), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (s_tvalid && s_tready) begin
      if (in_cnt % FRAME == 0) frame_open = pass;
      if (frame_open) begin exp_q.push_back(s_tdata); n_pass++; in_cnt++; end
      else n_drop++;
    end
    if (s_tvalid && !frame_open && (in_cnt % FRAME != 0)) begin
      checks++;
      if (!s_tready) begin failures++; $display("FAIL closed gate did not accept"); end
    end
    if (m_tvalid && m_tready) begin
      checks++; got++;
      if (exp_q.size() == 0 || m_tdata !== exp_q.pop_front()) begin failures++; $display("FAIL data at %0d", got); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 8000; i++) begin
      @(negedge clk);
      m_tready = ($urandom % 4) != 0;
      if (!s_tvalid || s_tready) begin
        s_tvalid = ($urandom % 6) != 0;
        s_tdata  = {32'($urandom), 32'(i)};
      end
      if ($urandom % 600 == 0) pass = !pass;
      if (i == 100) pass = 1;
    end
    @(negedge clk) s_tvalid = 0; m_tready = 1;
    repeat (4) @(negedge clk);
    checks += 2;
    if (got != n_pass || n_drop < FRAME || n_pass < 2 * FRAME) begin failures++; $display("FAIL counts %0d %0d %0d", got, n_pass, n_drop); end
    if (n_pass % FRAME != 0) begin failures++; $display("FAIL partial frame passed"); end
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
