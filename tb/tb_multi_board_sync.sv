// Two-board synchronisation test: two complete boards (pulsar_daq_top at its defaults)
// share the ADC clock, the 10 MHz SYSREF and the 1PPS, as boards locked to a common
// 10 MHz reference do, but the 1PPS reaches each board through a different cable
// delay.
//
// Every ADC sample carries its own time stamp: with the default shift of 8 the upper
// byte of the 16-bit sample survives, and sample k of an ADC clock cycle carries byte
// k of {stream, board, 48-bit cycle number}. Each 8-byte group of a payload therefore
// names its cycle, stream and board.
//
// The test arms both boards, sends a 1PPS whose arrival at the two boards differs by
// up to 85 ns (more than eight ADC cycles, but inside one SYSREF period), lets every
// stream send a few packets, stops, and repeats this for several starts with different
// delays. It checks that:
//   - every packet has 65 beats, tkeep and the stream's tid;
//   - the 4096 samples of a packet are consecutive and of the right stream and board;
//   - packet n of a stream starts 512 cycles after packet n-1 (counter and data agree);
//   - in every start all 16 streams of both boards begin on the same ADC cycle;
//   - the first cycle lies the same number of cycles after the 1PPS edge in every
//     start (deterministic latency across restarts);
//   - no sample is lost (overflow counters stay 0).
// It counts starts whose 1PPS skew between boards exceeded one ADC clock period and
// fails if there were none.
module tb_multi_board_sync;
  import pb_pkg::*;
  localparam int NB = 2, NS = 8, RUNS = 5;

  logic pl_refclk = 0, pl_sysref = 0, adc_clk = 0, eth_clk = 0;
  logic adc_rst = 1, eth_rst = 1;
  logic [NB-1:0] pps_b = '0;
  longint gc = 0;              // ADC clock cycle number, common to both boards

  // AXI4-Lite master, broadcast to both boards
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, arvalid = 0;
  logic [31:0] wdata = 0;
  logic [NB-1:0] awready_v, bvalid_v, rvalid_v, dv_v;

  always #5     adc_clk   = ~adc_clk;
  always #3     eth_clk   = ~eth_clk;
  always #2     pl_refclk = ~pl_refclk;
  always #50    pl_sysref = ~pl_sysref;
  always @(posedge adc_clk) if (!adc_rst) gc <= gc + 1;

  int checks = 0, failures = 0;
  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", msg, $time); end
  endtask

  int run = 0;
  longint first_gc [NB][RUNS][NS];
  int     npk      [NB][RUNS][NS];
  longint gc_at_pps [RUNS];
  int m_skew = 0, m_packets = 0;

  for (genvar b = 0; b < NB; b++) begin : g_board
    logic [N_SAMPLES*ADC_W-1:0] adc_tdata [NS];
    logic [31:0]  overflow [NS];
    logic [511:0] tdata;
    logic [63:0]  tkeep;
    logic         tlast, tvalid, tready = 0;
    logic [31:0]  dest_ip;
    logic [15:0]  dest_port;
    logic [2:0]   tid;
    logic         sr_adc, sr_dac, data_valid;
    logic         awready, wready, bvalid, arready, rvalid;
    logic [31:0]  rdata;
    logic [1:0]   bresp, rresp;

    pulsar_daq_top dut (
      .pl_refclk(pl_refclk), .pl_sysref(pl_sysref), .adc_clk(adc_clk), .adc_rst(adc_rst), .pps_in(pps_b[b]),
      .user_sysref_adc(sr_adc), .user_sysref_dac(sr_dac), .data_valid(data_valid),
      .s_adc_tdata(adc_tdata), .s_adc_tvalid({NS{!adc_rst}}), .overflow_cnt(overflow),
      .eth_clk(eth_clk), .eth_rst(eth_rst),
      .m_eth_tdata(tdata), .m_eth_tkeep(tkeep), .m_eth_tlast(tlast), .m_eth_tvalid(tvalid), .m_eth_tready(tready),
      .dest_ip(dest_ip), .dest_port(dest_port), .tid(tid),
      .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
      .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
      .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(1'b1),
      .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
      .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(1'b1));

    assign awready_v[b] = awready;
    assign bvalid_v[b]  = bvalid;
    assign rvalid_v[b]  = rvalid;
    assign dv_v[b]      = data_valid;

    // time-stamped samples: byte k of {stream, board, cycle} in the upper byte
    always @(negedge adc_clk)
      for (int i = 0; i < NS; i++) begin
        logic [63:0] v;
        v = {8'(i), 8'(b), gc[47:0]};
        for (int k = 0; k < N_SAMPLES; k++)
          adc_tdata[i][k*ADC_W +: ADC_W] <= {v[k*8 +: 8], 8'($urandom)};
      end

    always @(negedge eth_clk) tready <= ($urandom % 8) != 0;

    byte unsigned pkt [$];
    int beats = 0;
    logic [2:0] ptid;
    always @(posedge eth_clk) if (!eth_rst && tvalid && tready) begin
      if (beats == 0) ptid = tid;
      check(tid == ptid, "tid changed inside a packet");
      for (int k = 0; k < 64; k++) if (tkeep[k]) pkt.push_back(tdata[k*8 +: 8]);
      beats++;
      if (tlast) begin
        longint cnt, g0;
        logic [63:0] v;
        bit ok;
        int i;
        i = int'(ptid);
        check(beats == 65 && pkt.size() == 8 + 4096, "packet length");
        if (pkt.size() == 8 + 4096) begin
          cnt = 0;
          for (int q = 0; q < 8; q++) cnt |= longint'(pkt[q]) << (8 * q);
          ok = 1;
          for (int j = 0; j < 512; j++) begin
            for (int q = 0; q < 8; q++) v[q*8 +: 8] = pkt[8 + 8*j + q];
            if (j == 0) g0 = longint'(v[47:0]);
            if (v[63:56] != 8'(i) || v[55:48] != 8'(b) || longint'(v[47:0]) != g0 + j) ok = 0;
          end
          check(ok, "samples not consecutive or from the wrong stream or board");
          if (cnt == 0) first_gc[b][run][i] = g0;
          else check(first_gc[b][run][i] >= 0 && g0 == first_gc[b][run][i] + 512 * cnt,
                     "packet counter and sample time disagree");
          npk[b][run][i]++;
          m_packets++;
        end
        pkt.delete();
        beats = 0;
      end
    end
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge eth_clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge eth_clk); while (awready_v != '1);
    @(negedge eth_clk) awvalid = 0; wvalid = 0;
    while (bvalid_v != '1) @(negedge eth_clk);
    @(negedge eth_clk);
  endtask

  initial begin
    int d [NB];
    longint lat0;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < RUNS; r++)
        for (int i = 0; i < NS; i++) begin first_gc[b][r][i] = -1; npk[b][r][i] = 0; end
    repeat (10) @(negedge eth_clk);
    adc_rst = 0; eth_rst = 0;
    for (int i = 0; i < NS; i++) begin
      wr(8'(8'h40 + 4 * i), 32'h0A00_0001 + i);
      wr(8'(8'h60 + 4 * i), 32'(10000 + i));
    end
    for (int r = 0; r < RUNS; r++) begin
      run = r;
      wr(8'h00, 1);
      #(1000 + ($urandom % 3000));
      // the shared 1PPS edge falls 7 ns after a SYSREF rising edge; each board sees
      // it after its own cable delay, 0 to 85 ns
      if (r == 0)      begin d[0] = 0;  d[1] = 85; end
      else if (r == 1) begin d[0] = 85; d[1] = 0;  end
      else for (int b = 0; b < NB; b++) d[b] = int'($urandom % 86);
      if (d[0] - d[1] > 10 || d[1] - d[0] > 10) m_skew++;
      @(posedge pl_sysref);
      #7;
      gc_at_pps[r] = gc;
      fork
        begin #(d[0]); pps_b[0] = 1; end
        begin #(d[1]); pps_b[1] = 1; end
      join
      #2000;
      pps_b = '0;
      #12000;
      wr(8'h00, 0);
      #16000;
    end

    for (int r = 0; r < RUNS; r++) begin
      for (int b = 0; b < NB; b++)
        for (int i = 0; i < NS; i++) begin
          check(npk[b][r][i] >= 2, "too few packets in a start");
          check(first_gc[b][r][i] == first_gc[0][r][0], "streams or boards did not start on the same cycle");
        end
      if (r == 0) lat0 = first_gc[0][0][0] - gc_at_pps[0];
      check(first_gc[0][r][0] - gc_at_pps[r] == lat0, "start latency after 1PPS changed between starts");
      $display("start %0d: first cycle %0d, %0d cycles after the 1PPS edge, %0d packets from stream 0 of board 0",
               r, first_gc[0][r][0], first_gc[0][r][0] - gc_at_pps[r], npk[0][r][0]);
    end
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < NS; i++)
        check(g_ovf(b, i) == 0, "samples lost");
    check(m_skew > 0, "no start with 1PPS skew above one ADC clock");
    $display("mechanisms: starts=%0d skewed_starts=%0d packets=%0d", RUNS, m_skew, m_packets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] g_ovf(int b, int i);
    return (b == 0) ? g_board[0].overflow[i] : g_board[1].overflow[i];
  endfunction

  initial begin
    repeat (40000) @(posedge adc_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
