// Test of data_stream at its default sizes: a ramp of 16-bit samples (the wanted 8 bits
// in the upper byte) enters at one beat per 10 ns clock; pass opens part-way. Output
// packets on the 6 ns clock must be 64 beats with tlast on the last, tid = ID, and carry
// consecutive samples starting with the first sample offered after pass rose. Then the
// reader stops until the FIFOs fill and beats are counted as lost.
module tb_data_stream;
  import pb_pkg::*;
  localparam int ID = 5;
  logic adc_clk = 0, eth_clk = 0, adc_rst = 1, eth_rst = 1, pass = 0;
  logic [127:0] s_tdata = '0;
  logic s_tvalid = 0;
  logic [31:0] overflow;
  wide_beat_t m_beat;
  logic m_tvalid, m_tready = 0;
  int checks = 0, failures = 0, beats = 0, pkts = 0;
  int g = 0;               // beat number of the ramp
  int first_g = -1;        // first beat offered with pass high
  int exp_s = 0;           // next expected sample number
  bit checking = 1;

  data_stream #(.ID(ID)) dut (.adc_clk(adc_clk), .adc_rst(adc_rst), .shift_count(4'd8), .pass(pass),
    .s_adc_tdata(s_tdata), .s_adc_tvalid(s_tvalid), .overflow_cnt(overflow),
    .eth_clk(eth_clk), .eth_rst(eth_rst), .m_beat(m_beat), .m_tvalid(m_tvalid), .m_tready(m_tready));
  always #5 adc_clk = ~adc_clk;
  always #3 eth_clk = ~eth_clk;

  // input: sample n has upper byte n mod 256 and a random lower byte
  always @(negedge adc_clk) if (!adc_rst) begin
    s_tvalid <= 1;
    for (int k = 0; k < 8; k++) s_tdata[k*16 +: 16] <= {8'(g*8 + k), 8'($urandom)};
  end
  always @(posedge adc_clk) if (!adc_rst && s_tvalid) begin
    // pass acts one stage after the scaler, on the beat captured one edge earlier
    if (pass && first_g < 0) begin first_g = g - 1; exp_s = (g - 1) * 8; end
    g++;
  end

  always @(posedge eth_clk) if (m_tvalid && m_tready && checking) begin
    beats++;
    checks += 2;
    if (m_beat.tid !== 3'(ID)) begin failures++; $display("FAIL tid"); end
    if (m_beat.tlast !== (beats % 64 == 0)) begin failures++; $display("FAIL tlast at beat %0d", beats); end
    for (int b = 0; b < 64; b++) begin
      checks++;
      if (m_beat.tdata[b*8 +: 8] !== 8'(exp_s)) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d byte %0d got %h exp %h", beats, b, m_beat.tdata[b*8 +: 8], 8'(exp_s));
      end
      exp_s++;
    end
    if (m_beat.tlast) pkts++;
  end

  initial begin
    int t0;
    repeat (4) @(negedge adc_clk);
    adc_rst = 0; eth_rst = 0;
    m_tready = 1;
    repeat (100) @(negedge adc_clk);
    checks++;
    if (m_tvalid) begin failures++; $display("FAIL data before pass"); end
    pass = 1;
    // 6 packets: 6 * 512 input beats
    repeat (6 * 512 + 200) @(negedge adc_clk);
    checks++;
    if (pkts != 6) begin failures++; $display("FAIL packets %0d", pkts); end
    checks++;
    if (overflow != 0) begin failures++; $display("FAIL overflow while draining"); end
    // stop the reader: cache 1024 + 128 beats + pipeline fill, then loss starts
    m_tready = 0;
    checking = 0;
    repeat (9 * 1024 + 2000) @(negedge adc_clk);
    checks++;
    if (overflow == 0) begin failures++; $display("FAIL no overflow counted"); end
    $display("overflow count %0d", overflow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
