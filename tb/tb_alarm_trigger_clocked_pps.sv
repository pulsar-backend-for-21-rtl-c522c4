// Test of alarm_trigger_clocked_pps: no start without arm; a 1PPS edge that began
// before arm does not start; the next edge after arm starts exactly one clock after the
// first high cycle; the output stays high; dropping arm stops and allows a new start.
module tb_alarm_trigger_clocked_pps;
  logic clk = 0, reset = 1, arm = 0, pps = 0, dout;
  int checks = 0, failures = 0;
  alarm_trigger_clocked_pps dut (.clk(clk), .reset(reset), .arm(arm), .d_in(pps), .d_out(dout));
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  task automatic pps_pulse(input int high_cycles);
    @(negedge clk) pps = 1;
    repeat (high_cycles) @(negedge clk);
    pps = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    reset = 0;
    // 1PPS without arm: nothing happens
    pps_pulse(10);
    repeat (5) @(negedge clk);
    check(dout == 0, "started without arm");
    // arm while 1PPS is already high: this edge must not count
    @(negedge clk) pps = 1;
    repeat (3) @(negedge clk);
    arm = 1;
    repeat (10) @(negedge clk);
    check(dout == 0, "started on edge that began before arm");
    pps = 0;
    repeat (20) @(negedge clk);
    check(dout == 0, "started without edge");
    // next rising edge: d_out high one clock after the first high cycle
    @(negedge clk) pps = 1;
    check(dout == 0, "early start");
    @(negedge clk);
    check(dout == 1, "no start one clock after edge");
    pps = 0;
    repeat (50) @(negedge clk);
    check(dout == 1, "did not stay high");
    pps_pulse(5);
    check(dout == 1, "dropped on later edge");
    // disarm stops; re-arm waits for a new edge
    arm = 0;
    @(negedge clk); @(negedge clk);
    check(dout == 0, "disarm did not stop");
    arm = 1;
    repeat (10) @(negedge clk);
    check(dout == 0, "restart without edge");
    pps_pulse(3);
    check(dout == 1, "no restart");
    // reset clears
    reset = 1; @(negedge clk); reset = 0; @(negedge clk);
    check(dout == 0, "reset did not clear");
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
