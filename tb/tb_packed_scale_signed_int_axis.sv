// Test of packed_scale_signed_int_axis: random 16-bit samples and shifts, including
// values that must saturate, with random back-pressure; every output beat is compared
// with a reference computed in the test bench, in order.
module tb_packed_scale_signed_int_axis;
  logic clk = 0, rst = 1;
  logic [3:0] shift = 0;
  logic [127:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0;
  logic [63:0] m_tdata;
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [63:0] exp_q [$];
  int n_sat = 0;

  packed_scale_signed_int_axis dut (.clk(clk), .rst(rst), .shift_count(shift),
    .s_tdata(s_tdata), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_tdata(m_tdata), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  function automatic logic [63:0] ref_scale(input logic [127:0] d, input int sh);
    logic [63:0] r;
    for (int k = 0; k < 8; k++) begin
      int v;
      v = int'($signed(d[k*16 +: 16]));
      v = v >>> sh;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      r[k*8 +: 8] = 8'(v);
    end
    return r;
  endfunction

  always @(posedge clk) if (!rst) begin
    if (s_tvalid && s_tready) begin exp_q.push_back(ref_scale(s_tdata, int'(shift))); sent++; end
    if (m_tvalid && m_tready) begin
      logic [63:0] e;
      checks++;
      e = exp_q.pop_front();
      if (m_tdata !== e) begin failures++; $display("FAIL beat %0d got %h exp %h", got, m_tdata, e); end
      got++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      m_tready = ($urandom % 4) != 0;
      if (!s_tvalid || s_tready) begin
        s_tvalid = ($urandom % 5) != 0;
        shift    = 4'(i / 40);                     // shifts 0..9 during the run
        for (int k = 0; k < 8; k++) s_tdata[k*16 +: 16] = 16'($urandom);
      end
    end
    @(negedge clk) s_tvalid = 0; m_tready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (got != sent || got < 200) begin failures++; $display("FAIL count sent %0d got %0d", sent, got); end
    // a direct value check: 0x7fff >> 4 saturates to 127, 0x8000 >> 4 to -128, 0x0130 >> 4 = 19
    rst = 1; @(negedge clk); rst = 0;
    shift = 4; s_tdata = {16'h7fff, 16'h8000, 16'h0130, 16'hfff0, 16'h0, 16'h07f0, 16'hf800, 16'hf7f0};
    s_tvalid = 1; @(negedge clk); s_tvalid = 0;
    checks++;
    if (m_tdata !== {8'd127, 8'h80, 8'd19, 8'hff, 8'h0, 8'h7f, 8'h80, 8'h80}) begin
      failures++; $display("FAIL direct %h", m_tdata);
    end
    exp_q.delete();
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
