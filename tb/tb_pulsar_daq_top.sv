// End-to-end test of pulsar_daq_top with all parameters at their defaults (8 streams,
// 1024-word cache FIFOs, 128-word clock-crossing FIFOs).
//
// The data converter is replaced by a generator: sample n of stream i has the upper
// byte R[n] ^ 37*i, R being a table of random bytes, and a random lower byte; with the
// default shift of 8 the payload byte must be R[n] ^ 37*i. The ADC clock runs at
// 100 MHz, the Ethernet clock at 166 MHz, SYSREF at 10 MHz; the 100 GbE side
// applies random back-pressure. The test goes through these phases:
//   1. configure destinations over AXI4-Lite, disable stream 7, send a 1PPS pulse
//      before arm (must be ignored), arm, send a 1PPS pulse (streams start);
//   2. run, then disarm: streams stop on a packet boundary, the FIFOs drain;
//   3. enable all streams, re-arm, 1PPS: all eight restart with counters from 0;
//   4. stop the 100 GbE side until the FIFOs overflow.
// Every packet is checked: 65 beats, tkeep, tid constant and destination IP/port of
// that stream on every beat, packet counter in sequence, 4096 samples equal to the
// generator's from one start sample n0 per run, n0 the same for all streams (all start
// on the same sample), n0 within a few beats of the 1PPS start. Each mechanism is
// counted and a failure is counted for any that never happened.
module tb_pulsar_daq_top;
  import pb_pkg::*;
  localparam int NS = 8;
  localparam int RSZ = 1 << 20;

  logic pl_refclk = 0, pl_sysref = 0, adc_clk = 0, eth_clk = 0;
  logic adc_rst = 1, eth_rst = 1, pps = 0;
  logic sr_adc, sr_dac, data_valid;
  logic [127:0] adc_tdata [NS];
  logic [NS-1:0] adc_tvalid = '0;
  logic [31:0] overflow [NS];
  logic [511:0] tdata;
  logic [63:0] tkeep;
  logic tlast, tvalid, tready = 0;
  logic [31:0] dest_ip;
  logic [15:0] dest_port;
  logic [2:0] tid;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1, arvalid = 0, arready, rvalid, rready = 1;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;

  pulsar_daq_top dut (
    .pl_refclk(pl_refclk), .pl_sysref(pl_sysref), .adc_clk(adc_clk), .adc_rst(adc_rst), .pps_in(pps),
    .user_sysref_adc(sr_adc), .user_sysref_dac(sr_dac), .data_valid(data_valid),
    .s_adc_tdata(adc_tdata), .s_adc_tvalid(adc_tvalid), .overflow_cnt(overflow),
    .eth_clk(eth_clk), .eth_rst(eth_rst),
    .m_eth_tdata(tdata), .m_eth_tkeep(tkeep), .m_eth_tlast(tlast), .m_eth_tvalid(tvalid), .m_eth_tready(tready),
    .dest_ip(dest_ip), .dest_port(dest_port), .tid(tid),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready));

  always #5     adc_clk   = ~adc_clk;
  always #3     eth_clk   = ~eth_clk;
  always #4.069 pl_refclk = ~pl_refclk;
  always #50    pl_sysref = ~pl_sysref;

  int checks = 0, failures = 0;
  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------- generator ----------------
  byte unsigned R [];
  int g = 0;                 // beat number of the converter output
  int g_start [3];           // beat number when data_valid rose, per run
  int run = -1;
  always @(negedge adc_clk) if (!adc_rst) begin
    adc_tvalid <= '1;
    for (int i = 0; i < NS; i++)
      for (int k = 0; k < 8; k++)
        adc_tdata[i][k*16 +: 16] <= {R[(g*8 + k) % RSZ] ^ 8'(37 * i), 8'($urandom)};
  end
  logic dv_q = 0;
  always @(posedge adc_clk) if (!adc_rst) begin
    if (data_valid && !dv_q) begin run++; g_start[run] = g; m_start++; end
    dv_q <= data_valid;
    g <= g + 1;
  end

  // ---------------- mechanisms ----------------
  int m_start = 0, m_prearm_ignored = 0, m_disabled_silent = 0, m_switch = 0, m_header = 0;
  int m_pause = 0, m_backpressure = 0, m_stop_whole = 0, m_overflow = 0, m_restart = 0;

  // ---------------- checker ----------------
  logic [31:0] cfg_ip [NS];
  logic [15:0] cfg_port [NS];
  byte unsigned pkt [$];
  int beats = 0, pkt_tid = -1, prev_tid = -1;
  longint exp_cnt [3][NS];
  int n0 [3][NS];
  int pkts_run [3][NS];
  bit checking = 1;
  int gap = 0; bit after_last = 0;
  logic [7:0] pause_cfg = 8'd4;

  function automatic int find_start(int i, int r);
    // search the generator table for the start sample of this packet
    for (int n = (g_start[r] - 32) * 8; n <= (g_start[r] + 32) * 8; n++) begin
      bit ok = 1;
      for (int j = 0; j < 64 && ok; j++)
        if (pkt[8 + j] != (R[(n + j) % RSZ] ^ 8'(37 * i))) ok = 0;
      if (ok) return n;
    end
    return -1;
  endfunction

  always @(posedge eth_clk) if (!eth_rst) begin
    if (tvalid && !tready) m_backpressure++;
    if (after_last && !tvalid) gap++;
    if (tvalid && tready) begin
      if (after_last) begin
        check(gap >= int'(pause_cfg), "pause after packet too short");
        if (gap >= int'(pause_cfg)) m_pause++;
        after_last = 0;
      end
      if (checking) begin
        if (beats == 0) pkt_tid = int'(tid);
        check(int'(tid) == pkt_tid, "tid changed inside packet");
        check(dest_ip == cfg_ip[tid] && dest_port == cfg_port[tid], "destination of tid");
        check(tkeep == (tlast ? 64'hFF : '1), "tkeep");
        for (int b = 0; b < (tlast ? 8 : 64); b++) pkt.push_back(tdata[b*8 +: 8]);
      end
      beats++;
      if (tlast) begin
        gap = 0; after_last = 1;
        if (checking) begin
          longint cnt;
          int r, i;
          r = run; i = pkt_tid;
          check(beats == 65 && pkt.size() == 8 + 4096, "packet length");
          cnt = 0;
          for (int b = 0; b < 8; b++) cnt |= longint'(pkt[b]) << (8 * b);
          check(cnt == exp_cnt[r][i], "packet counter");
          if (cnt == exp_cnt[r][i]) m_header++;
          if (cnt == 0) begin
            n0[r][i] = find_start(i, r);
            check(n0[r][i] >= 0, "start sample not found near the 1PPS start");
          end
          if (n0[r][i] >= 0) begin
            int errs, base;
            errs = 0;
            base = n0[r][i] + 4096 * int'(cnt[31:0]);
            for (int j = 0; j < 4096; j++)
              if (pkt[8 + j] != (R[(base + j) % RSZ] ^ 8'(37 * i))) errs++;
            if (errs != 0) $display("stream %0d packet %0d: %0d wrong samples", i, cnt, errs);
            check(errs == 0, "samples");
          end
          exp_cnt[r][i] = cnt + 1;
          pkts_run[r][i]++;
          if (prev_tid >= 0 && prev_tid != i) m_switch++;
          prev_tid = i;
        end
        pkt.delete();
        beats = 0;
      end
    end
  end

  // ---------------- AXI4-Lite ----------------
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge eth_clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge eth_clk); while (!awready);
    @(negedge eth_clk) awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge eth_clk);
    @(negedge eth_clk);
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge eth_clk);
    araddr = a; arvalid = 1;
    do @(posedge eth_clk); while (!arready);
    @(negedge eth_clk) arvalid = 0;
    while (!rvalid) @(negedge eth_clk);
    d = rdata;
    @(negedge eth_clk);
  endtask
  task automatic pps_pulse();
    pps = 1; #2000; pps = 0;
  endtask

  bit rdy_random = 1;
  always @(negedge eth_clk) tready <= rdy_random ? (($urandom % 10) != 0) : 1'b0;

  initial begin
    logic [31:0] d;
    R = new[RSZ];
    foreach (R[n]) R[n] = 8'($urandom);
    for (int r = 0; r < 3; r++) for (int i = 0; i < NS; i++) begin exp_cnt[r][i] = 0; n0[r][i] = -1; pkts_run[r][i] = 0; end
    repeat (10) @(negedge adc_clk);
    adc_rst = 0; eth_rst = 0;
    // phase 1: configuration
    for (int i = 0; i < NS; i++) begin
      cfg_ip[i] = 32'h0A00_0010 + 32'(i); cfg_port[i] = 16'(4000 + i);
      wr(8'(8'h40 + 4 * i), cfg_ip[i]);
      wr(8'(8'h60 + 4 * i), 32'(cfg_port[i]));
    end
    wr(8'h04, 32'h7F);            // stream 7 off
    #1000 pps_pulse();
    #3000;
    check(!data_valid, "started on 1PPS before arm");
    if (!data_valid) m_prearm_ignored++;
    wr(8'h00, 1);
    #3000 pps_pulse();
    #500;
    check(data_valid, "no start on 1PPS after arm");
    rd(8'h10, d);
    check(d == 1, "status register");
    // phase 2: run about three packets' time, then stop
    repeat (3 * 512 + 100) @(negedge adc_clk);
    wr(8'h00, 0);
    repeat (2 * 512 + 2000) @(negedge adc_clk);
    check(!data_valid, "did not stop");
    check(pkts_run[0][7] == 0, "disabled stream sent packets");
    if (pkts_run[0][7] == 0 && pkts_run[0][0] > 0) m_disabled_silent++;
    begin
      bit same = 1;
      for (int i = 1; i < NS - 1; i++) if (pkts_run[0][i] != pkts_run[0][0]) same = 0;
      check(same && pkts_run[0][0] >= 3, "streams stopped unevenly");
      if (same && pkts_run[0][0] >= 3) m_stop_whole++;
    end
    for (int i = 1; i < NS - 1; i++) check(n0[0][i] == n0[0][0] && n0[0][0] >= 0, "streams not aligned, run 1");
    // phase 3: all streams, second start
    wr(8'h04, 32'hFF);
    wr(8'h00, 1);
    #3000 pps_pulse();
    repeat (2 * 512 + 100) @(negedge adc_clk);
    wr(8'h00, 0);
    repeat (2 * 512 + 2000) @(negedge adc_clk);
    for (int i = 0; i < NS; i++) begin
      check(pkts_run[1][i] >= 2 && pkts_run[1][i] == pkts_run[1][0], "run 2 packet count");
      check(n0[1][i] == n0[1][0] && n0[1][0] >= 0, "streams not aligned, run 2");
    end
    if (pkts_run[1][7] >= 2 && n0[1][7] == n0[1][0]) m_restart++;
    // phase 4: 100 GbE side stops, FIFOs overflow
    checking = 0;
    wr(8'h00, 1);
    #3000 pps_pulse();
    rdy_random = 0;
    repeat (12000) @(negedge adc_clk);
    for (int i = 0; i < NS; i++) check(overflow[i] > 0, "no overflow counted");
    if (overflow[0] > 0) m_overflow++;
    rdy_random = 1;
    repeat (200) @(negedge adc_clk);

    $display("mechanisms: start=%0d prearm_ignored=%0d disabled_silent=%0d switch=%0d header=%0d pause=%0d backpressure=%0d stop_whole=%0d restart=%0d overflow=%0d",
      m_start, m_prearm_ignored, m_disabled_silent, m_switch, m_header, m_pause, m_backpressure, m_stop_whole, m_restart, m_overflow);
    $display("packets run 1: %0d per stream (7 streams), run 2: %0d per stream (8 streams)", pkts_run[0][0], pkts_run[1][0]);
    check(m_start >= 2, "mechanism: start on 1PPS");
    check(m_prearm_ignored > 0, "mechanism: 1PPS before arm ignored");
    check(m_disabled_silent > 0, "mechanism: disabled stream");
    check(m_switch > 0, "mechanism: switch between streams");
    check(m_header > 0, "mechanism: header insertion");
    check(m_pause > 0, "mechanism: pause after packet");
    check(m_backpressure > 0, "mechanism: back-pressure");
    check(m_stop_whole > 0, "mechanism: stop on packet boundary");
    check(m_restart > 0, "mechanism: re-arm and restart");
    check(m_overflow > 0, "mechanism: overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
