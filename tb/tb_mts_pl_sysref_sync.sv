// Test of mts_pl_sysref_sync: both outputs equal the input sampled at the previous
// rising edge of pl_clk.
module tb_mts_pl_sysref_sync;
  logic clk = 0, sysref = 0, adc, dac, prev = 0;
  int checks = 0, failures = 0;
  mts_pl_sysref_sync dut (.pl_clk(clk), .pl_sysref(sysref), .user_sysref_adc(adc), .user_sysref_dac(dac));
  always #4 clk = ~clk;
  initial begin
    @(posedge clk); @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      prev   = sysref;
      sysref = ((i / 7) % 2) == 1;     // slow square wave, like a 10 MHz SYSREF
      @(posedge clk); @(negedge clk);
      checks += 2;
      if (adc !== sysref) begin failures++; $display("FAIL adc %0d", i); end
      if (dac !== sysref) begin failures++; $display("FAIL dac %0d", i); end
    end
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
