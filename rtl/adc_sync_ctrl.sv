// adc_sync_ctrl: the synchronisation logic between the clock inputs of a sample board
// and its data streams.
//
// Two chains run side by side. PL SYSREF (10 MHz, phase-locked to the global 10 MHz
// reference) is captured by the PL reference clock and then by the AXI-Stream clock,
// and handed to the RF data converter as user SYSREF for multi-tile synchronisation.
// The 1PPS input is sampled by SYSREF used as a clock, then by the AXI-Stream clock,
// both with two-flop synchronisers, and goes to the start trigger, whose output
// data_valid lets the streams through from the first 1PPS edge after arm.
//
// Interface: pl_refclk, pl_sysref, clk (AXI-Stream clock), reset, arm, pps_in ->
// user_sysref_adc, user_sysref_dac, data_valid (all outputs in the clk domain).
// Timing: a 1PPS edge reaches data_valid after 2 SYSREF edges, 2 clk edges and the
// trigger's edge detector. The chain structure follows the paper's block design; the
// clocking wizard and input buffers in front of it are outside this module.
module adc_sync_ctrl (
  input  logic pl_refclk,
  input  logic pl_sysref,
  input  logic clk,
  input  logic reset,
  input  logic arm,
  input  logic pps_in,
  output logic user_sysref_adc,
  output logic user_sysref_dac,
  output logic data_valid
);
  logic sysref_refclk, sysref_refclk_dac_unused, sysref_clk;
  logic pps_sysref, pps_clk;

  mts_pl_sysref_sync u_sysref_refclk (
    .pl_clk(pl_refclk), .pl_sysref(pl_sysref),
    .user_sysref_adc(sysref_refclk), .user_sysref_dac(sysref_refclk_dac_unused));

  mts_pl_sysref_sync u_sysref_main (
    .pl_clk(clk), .pl_sysref(sysref_refclk),
    .user_sysref_adc(sysref_clk), .user_sysref_dac(user_sysref_dac));

  assign user_sysref_adc = sysref_clk;

  clock_domain_cross_2_reg u_pps_sysref (.clk(pl_sysref), .d_in(pps_in),     .d_out(pps_sysref));
  clock_domain_cross_2_reg u_pps_main   (.clk(clk),       .d_in(pps_sysref), .d_out(pps_clk));

  alarm_trigger_clocked_pps u_trigger (
    .clk(clk), .reset(reset), .arm(arm), .d_in(pps_clk), .d_out(data_valid));
endmodule
