// Test of mmio_regs over AXI4-Lite: reset values, writes and read-back of every
// register, the read-only status bit, and selection of destination IP and port by tid.
module tb_mmio_regs;
  logic clk = 0, rst = 1;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic arm, dv = 0;
  logic [7:0] txen, pause;
  logic [3:0] shift;
  logic [2:0] tid = 0;
  logic [31:0] ip;
  logic [15:0] port;
  int checks = 0, failures = 0;

  mmio_regs dut (.clk(clk), .rst(rst), .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(wdata), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .arm(arm), .tx_enable(txen), .shift_count(shift),
    .pause_count(pause), .data_valid(dv), .tid(tid), .dest_ip(ip), .dest_port(port));
  always #5 clk = ~clk;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk) awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    check(bresp == 2'b00, "bresp");
    @(negedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst = 0;
    check(arm == 0 && txen == 8'hFF && shift == 8 && pause == 4, "reset values");
    wr(8'h00, 1); check(arm == 1, "arm write");
    wr(8'h04, 32'h5A); check(txen == 8'h5A, "tx_enable write");
    wr(8'h08, 3); check(shift == 3, "shift write");
    wr(8'h0C, 17); check(pause == 17, "pause write");
    for (int i = 0; i < 8; i++) begin
      wr(8'(8'h40 + 4 * i), 32'hC0A8_0000 + 32'(i));
      wr(8'(8'h60 + 4 * i), 32'(60000 + i));
    end
    rd(8'h00, d); check(d == 1, "arm read");
    rd(8'h04, d); check(d == 32'h5A, "tx_enable read");
    rd(8'h08, d); check(d == 3, "shift read");
    rd(8'h0C, d); check(d == 17, "pause read");
    rd(8'h10, d); check(d == 0, "status 0");
    dv = 1;
    rd(8'h10, d); check(d == 1, "status 1");
    for (int i = 0; i < 8; i++) begin
      rd(8'(8'h40 + 4 * i), d); check(d == 32'hC0A8_0000 + 32'(i), "ip read");
      rd(8'(8'h60 + 4 * i), d); check(d == 32'(60000 + i), "port read");
    end
    for (int i = 7; i >= 0; i--) begin
      tid = 3'(i); #1;
      check(ip == 32'hC0A8_0000 + 32'(i) && port == 16'(60000 + i), "tid selection");
    end
    rd(8'hF0, d); check(d == 0, "unmapped read");
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
