// clock_domain_cross_2_reg: re-times a single-bit asynchronous signal into the clock
// domain of clk through a chain of STAGES flip-flops (two by default).
//
// The firmware uses it for the 1PPS input: first sampled by the 10 MHz SYSREF used as a
// clock, then by the AXI-Stream clock of the ADC streams. Capturing the slow-edged
// 1PPS on the 10 MHz clock first relaxes the rise-time requirement that the fast clock
// alone would place on it.
//
// Interface: clk, d_in (asynchronous), d_out (synchronous to clk).
// Timing: d_out follows d_in after STAGES rising edges of clk.
// The two-register form follows the module's name in the firmware; having no reset is
// this design's choice.
module clock_domain_cross_2_reg #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic d_in,
  output logic d_out
);
  logic [STAGES-1:0] sync_q;

  always_ff @(posedge clk)
    sync_q <= {sync_q[STAGES-2:0], d_in};

  assign d_out = sync_q[STAGES-1];
endmodule
