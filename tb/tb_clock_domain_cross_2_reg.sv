// Test of clock_domain_cross_2_reg: random input bits must appear at the output exactly
// two clock edges later.
module tb_clock_domain_cross_2_reg;
  logic clk = 0, d_in = 0, d_out;
  int checks = 0, failures = 0;
  logic [1:0] hist = '0;
  clock_domain_cross_2_reg dut (.clk(clk), .d_in(d_in), .d_out(d_out));
  always #5 clk = ~clk;
  initial begin
    repeat (3) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      hist = {hist[0], d_in};   // hist[1]: value sampled two edges ago
      checks++;
      if (d_out !== hist[1]) begin failures++; $display("FAIL cycle %0d got %b exp %b", i, d_out, hist[1]); end
      d_in = 1'($urandom);
      @(posedge clk);
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
