// Test of adc_sync_ctrl with three unrelated clocks: user SYSREF follows PL SYSREF
// after the two capture stages; data_valid rises only after arm, within the latency of
// the 1PPS capture chain (2 SYSREF + 3 AXI-Stream clock edges), and not before the 1PPS
// edge.
module tb_adc_sync_ctrl;
  logic pl_refclk = 0, pl_sysref = 0, clk = 0;
  logic reset = 1, arm = 0, pps = 0;
  logic sr_adc, sr_dac, dv;
  int checks = 0, failures = 0;
  realtime t_edge;

  adc_sync_ctrl dut (.pl_refclk(pl_refclk), .pl_sysref(pl_sysref), .clk(clk), .reset(reset),
    .arm(arm), .pps_in(pps), .user_sysref_adc(sr_adc), .user_sysref_dac(sr_dac), .data_valid(dv));

  always #4.069 pl_refclk = ~pl_refclk;   // 122.88 MHz
  always #50    pl_sysref = ~pl_sysref;   // 10 MHz
  always #5     clk = ~clk;               // 100 MHz AXI-Stream clock

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  // user SYSREF must be a delayed copy of pl_sysref: sample it in the middle of each half
  // period and compare with pl_sysref a short delay earlier
  initial begin
    #1000;
    for (int i = 0; i < 40; i++) begin
      @(posedge pl_sysref); #40;
      check(sr_adc == 1 && sr_dac == 1, "sysref high not seen");
      @(negedge pl_sysref); #40;
      check(sr_adc == 0 && sr_dac == 0, "sysref low not seen");
    end
  end

  initial begin
    repeat (5) @(posedge clk);
    reset = 0;
    #2000 pps = 1; #3000 pps = 0;          // 1PPS before arm
    #2000;
    check(dv == 0, "started before arm");
    arm = 1;
    #3000;
    check(dv == 0, "started without 1PPS edge");
    #13 pps = 1; t_edge = $realtime;
    wait (dv == 1);
    check(($realtime - t_edge) <= 2*100 + 4*10 + 1, "start too late");
    check(($realtime - t_edge) >= 100 + 2*10, "start too early");
    #3000 pps = 0;
    #2000;
    check(dv == 1, "did not stay valid");
    #1000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
