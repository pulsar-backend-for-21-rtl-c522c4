// Sustained-rate test of one board (pulsar_daq_top at its defaults): all eight streams
// at 800 Msps (8 samples per 100 MHz ADC cycle) into one 100 GbE port that never
// applies back-pressure, with the Ethernet-side clock at 116 MHz.
//
// Every packet costs 65 + pause_count Ethernet cycles: 65 beats, then pause_count idle
// cycles, during which the switch also chooses its next input (for pause_count >= 1
// arbitration costs nothing extra). Eight packets are produced every 512 ADC cycles,
// so the link keeps up only if 8 x (65 + pause_count) Ethernet cycles fit into 512 ADC
// cycles. The test
//   1. measures the spacing between packet starts whenever the output is saturated
//      and checks that it is always 65 + pause_count;
//   2. with pause_count = 4, the default, 8 x 69 = 552 cycles are needed per 5.12 us,
//      i.e. at least 107.8 MHz: at 116 MHz no sample may be lost over 40 packets per
//      stream, and every payload must hold consecutive samples;
//   3. with pause_count = 40, 8 x 105 = 840 cycles (164 MHz) are needed: at 116 MHz
//      the caches must fill and the overflow counters must start counting.
// Samples are time-stamped as in the two-board test: sample k of an ADC cycle carries
// byte k of {stream, 8'h00, 48-bit cycle number} in its upper byte.
module tb_link_throughput;
  import pb_pkg::*;
  localparam int NS = 8;
  localparam real ETH_HALF = 4.3;    // 116.3 MHz

  logic pl_refclk = 0, pl_sysref = 0, adc_clk = 0, eth_clk = 0;
  logic adc_rst = 1, eth_rst = 1, pps = 0;
  logic sr_adc, sr_dac, data_valid;
  logic [N_SAMPLES*ADC_W-1:0] adc_tdata [NS];
  logic [31:0] overflow [NS];
  logic [511:0] tdata;
  logic [63:0] tkeep;
  logic tlast, tvalid;
  logic [31:0] dest_ip;
  logic [15:0] dest_port;
  logic [2:0] tid;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, arvalid = 0, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  longint gc = 0;

  pulsar_daq_top dut (
    .pl_refclk(pl_refclk), .pl_sysref(pl_sysref), .adc_clk(adc_clk), .adc_rst(adc_rst), .pps_in(pps),
    .user_sysref_adc(sr_adc), .user_sysref_dac(sr_dac), .data_valid(data_valid),
    .s_adc_tdata(adc_tdata), .s_adc_tvalid({NS{!adc_rst}}), .overflow_cnt(overflow),
    .eth_clk(eth_clk), .eth_rst(eth_rst),
    .m_eth_tdata(tdata), .m_eth_tkeep(tkeep), .m_eth_tlast(tlast), .m_eth_tvalid(tvalid), .m_eth_tready(1'b1),
    .dest_ip(dest_ip), .dest_port(dest_port), .tid(tid),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1));

  always #5        adc_clk   = ~adc_clk;
  always #ETH_HALF eth_clk   = ~eth_clk;
  always #2        pl_refclk = ~pl_refclk;
  always #50       pl_sysref = ~pl_sysref;
  always @(posedge adc_clk) if (!adc_rst) gc <= gc + 1;

  always @(negedge adc_clk)
    for (int i = 0; i < NS; i++) begin
      logic [63:0] v;
      v = {8'(i), 8'h00, gc[47:0]};
      for (int k = 0; k < N_SAMPLES; k++)
        adc_tdata[i][k*ADC_W +: ADC_W] <= {v[k*8 +: 8], 8'($urandom)};
    end

  int checks = 0, failures = 0;
  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------- output monitor ----------------
  int unsigned pause_cfg = 4;
  bit check_data = 1;
  longint ec = 0, last_start = -1;
  int beats = 0, npk [NS], n_spacing = 0, n_spacing_bad = 0, min_sp = 1 << 30, max_sp = 0;
  byte unsigned pkt [$];
  always @(posedge eth_clk) if (!eth_rst) begin
    ec <= ec + 1;
    if (tvalid) begin
      if (beats == 0) begin
        if (last_start >= 0) begin
          int sp;
          sp = int'(ec - last_start);
          n_spacing++;
          if (sp < min_sp) min_sp = sp;
          if (sp > max_sp) max_sp = sp;
          // saturated output: a new packet starts as early as the design allows
          if (sp != 65 + int'(pause_cfg)) n_spacing_bad++;
        end
        last_start = ec;
      end
      for (int k = 0; k < 64; k++) if (tkeep[k]) pkt.push_back(tdata[k*8 +: 8]);
      beats++;
      if (tlast) begin
        int i;
        bit ok;
        logic [63:0] v;
        longint g0;
        i = int'(tid);
        ok = (pkt.size() == 8 + 4096);
        if (ok && check_data)
          for (int j = 0; j < 512; j++) begin
            for (int q = 0; q < 8; q++) v[q*8 +: 8] = pkt[8 + 8*j + q];
            if (j == 0) g0 = longint'(v[47:0]);
            if (v[63:56] != 8'(i) || longint'(v[47:0]) != g0 + j) ok = 0;
          end
        check(ok, "payload not 4096 consecutive samples of its stream");
        npk[i]++;
        pkt.delete();
        beats = 0;
      end
    end else if (beats == 0 && last_start >= 0 && ec - last_start > 65 + longint'(pause_cfg)) begin
      last_start = -1;   // output ran dry: the next spacing is not a saturated one
    end
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge eth_clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge eth_clk); while (!awready);
    @(negedge eth_clk) awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge eth_clk);
    @(negedge eth_clk);
  endtask

  task automatic start_capture();
    wr(8'h00, 1);
    #1000 pps = 1;
    #2000 pps = 0;
  endtask

  int lossless_pkts, sat_spacings;
  initial begin
    for (int i = 0; i < NS; i++) npk[i] = 0;
    repeat (10) @(negedge eth_clk);
    adc_rst = 0; eth_rst = 0;

    // 1. default pause: the link keeps up
    start_capture();
    while (npk[0] < 40) @(posedge eth_clk);
    for (int i = 0; i < NS; i++) check(overflow[i] == 0, "samples lost at the default pause");
    for (int i = 0; i < NS; i++) check(npk[i] >= 39, "a stream fell behind");
    lossless_pkts = npk[0];
    wr(8'h00, 0);
    #30000;
    check(n_spacing > 0 && n_spacing_bad == 0, "spacing of saturated packets at pause 4");
    sat_spacings = n_spacing;
    $display("pause 4: %0d packets per stream, no loss, %0d spacings measured, all 69 cycles (min %0d max %0d)",
             lossless_pkts, n_spacing, min_sp, max_sp);

    // 2. long pause: demand exceeds the link, the caches overflow
    pause_cfg = 40;
    n_spacing = 0; n_spacing_bad = 0; min_sp = 1 << 30; max_sp = 0; last_start = -1;
    check_data = 0;
    wr(8'h0C, 40);
    start_capture();
    while (overflow[0] == 0 && npk[0] < 200) @(posedge eth_clk);
    check(overflow[0] != 0, "no overflow with demand above the link rate");
    check(n_spacing > 0 && n_spacing_bad == 0, "spacing of saturated packets at pause 40");
    $display("pause 40: overflow after %0d packets from stream 0, %0d spacings, all 105 cycles (min %0d max %0d)",
             npk[0], n_spacing, min_sp, max_sp);
    $display("mechanisms: lossless_packets=%0d saturated_spacings=%0d overflow=%0d",
             lossless_pkts, sat_spacings + n_spacing, overflow[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150000) @(posedge adc_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
