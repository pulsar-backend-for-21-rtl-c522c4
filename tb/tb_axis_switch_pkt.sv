// Test of axis_switch_pkt: eight sources send packets of random length (tid = source,
// data = source and sequence number) with random gaps and back-pressure. Every packet
// must arrive whole, not interleaved with another, in order per source; while all
// sources are busy the grant must rotate round-robin, and a source that is waiting
// with a packet must be served before N-1 other packets have gone out.
module tb_axis_switch_pkt;
  import pb_pkg::*;
  localparam int N = 8, PKTS = 12;
  logic clk = 0, rst = 1;
  wide_beat_t s_beat [N];
  logic [N-1:0] s_tvalid = '0, s_tready;
  wide_beat_t m_beat;
  logic m_tvalid, m_tready = 0;
  int checks = 0, failures = 0;
  int seq_out [N];
  int cur_src = -1, prev_src = -1, n_pkts = 0, n_rr = 0, all_busy_pkts = 0;
  int word_in_pkt = 0;
  int waited [N];
  int max_wait = 0;

  axis_switch_pkt dut (.clk(clk), .rst(rst), .s_beat(s_beat), .s_tvalid(s_tvalid), .s_tready(s_tready),
    .m_beat(m_beat), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      int len;
      s_beat[i] = '0;
      @(negedge rst);
      for (int p = 0; p < PKTS; p++) begin
        len = 1 + ($urandom % 20);
        for (int w = 0; w < len; w++) begin
          @(negedge clk);
          s_tvalid[i] = 0;
          if (i >= 4) while ($urandom % 4 == 0) @(negedge clk);
          s_tvalid[i] = 1;
          s_beat[i].tid = 3'(i);
          s_beat[i].tlast = (w == len - 1);
          s_beat[i].tdata = {448'(0), 16'(i), 16'(p), 32'(w)};
          do @(posedge clk); while (!s_tready[i]);
        end
        @(negedge clk) s_tvalid[i] = 0;
      end
    end
  end

  always @(posedge clk) if (!rst && m_tvalid && m_tready) begin
    int src, p, w;
    src = int'(m_beat.tdata[63:48]); p = int'(m_beat.tdata[47:32]); w = int'(m_beat.tdata[31:0]);
    checks += 3;
    if (m_beat.tid != 3'(src)) begin failures++; $display("FAIL tid"); end
    if (cur_src >= 0 && src != cur_src) begin failures++; $display("FAIL interleaved %0d into %0d", src, cur_src); end
    if (cur_src < 0) begin
      if (p != seq_out[src] || w != 0) begin failures++; $display("FAIL order src %0d p %0d", src, p); end
      if (prev_src >= 0 && src == (prev_src + 1) % N) n_rr++;
    end else if (w != word_in_pkt) begin failures++; $display("FAIL word order"); end
    cur_src = src;
    word_in_pkt = w + 1;
    if (m_beat.tlast) begin
      for (int k = 0; k < N; k++)
        if (k != src && s_tvalid[k]) begin
          waited[k]++;
          if (waited[k] > max_wait) max_wait = waited[k];
        end
      waited[src] = 0;
      seq_out[src]++; n_pkts++; prev_src = src; cur_src = -1; word_in_pkt = 0;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin seq_out[i] = 0; waited[i] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (6000) begin
      @(negedge clk);
      m_tready = ($urandom % 4) != 0;
    end
    checks++;
    if (n_pkts != N * PKTS) begin failures++; $display("FAIL packets %0d", n_pkts); end
    // the first four sources never pause inside a packet, so most grants follow in turn
    checks++;
    if (n_rr < N * PKTS / 3) begin failures++; $display("FAIL round-robin only %0d", n_rr); end
    checks++;
    if (max_wait > N - 1) begin failures++; $display("FAIL a waiting source saw %0d other packets", max_wait); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
