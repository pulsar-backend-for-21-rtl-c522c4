// Test of packet_counter: random increments on random streams against a reference
// array; clear zeroes all counters; header shows the selected stream's count.
module tb_packet_counter;
  logic clk = 0, rst = 1, clear = 0, inc = 0;
  logic [2:0] tid = 0;
  logic [63:0] header;
  longint unsigned ref_cnt [8];
  int checks = 0, failures = 0;

  packet_counter dut (.clk(clk), .rst(rst), .clear(clear), .tid(tid), .increase(inc), .header(header));
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 8; i++) ref_cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 2000; i++) begin
      tid = 3'($urandom);
      inc = ($urandom % 3) != 0;
      clear = (i == 1000);
      #1;
      checks++;
      if (header !== 64'(ref_cnt[tid])) begin failures++; $display("FAIL stream %0d got %0d exp %0d", tid, header, ref_cnt[tid]); end
      @(negedge clk);
      if (clear) for (int k = 0; k < 8; k++) ref_cnt[k] = 0;
      else if (inc) ref_cnt[tid]++;
    end
    inc = 0; clear = 0;
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
