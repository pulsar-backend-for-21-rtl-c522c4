// mts_pl_sysref_sync: captures PL SYSREF on a programmable-logic clock for the
// multi-tile synchronisation of the RF data converter.
//
// The converter requires SYSREF to be sampled in the PL, first by the PL reference
// clock and then by the AXI-Stream clock; two instances of this module in series do
// that. The captured value drives both the ADC and the DAC user-SYSREF inputs, which
// lets the converter measure the latency of its asynchronous FIFO towards the PL.
//
// Interface: pl_clk, pl_sysref -> user_sysref_adc, user_sysref_dac.
// Timing: outputs change one pl_clk edge after pl_sysref is sampled.
// The two-stage capture follows the paper; the single capture flop per instance and
// the shared output are this design's choice.
module mts_pl_sysref_sync (
  input  logic pl_clk,
  input  logic pl_sysref,
  output logic user_sysref_adc,
  output logic user_sysref_dac
);
  logic sysref_q;

  always_ff @(posedge pl_clk)
    sysref_q <= pl_sysref;

  assign user_sysref_adc = sysref_q;
  assign user_sysref_dac = sysref_q;
endmodule
