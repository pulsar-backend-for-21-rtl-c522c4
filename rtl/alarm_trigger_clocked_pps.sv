// alarm_trigger_clocked_pps: starts the data streams on a 1PPS edge.
//
// Once the processing system raises arm ("start capturing"), the module waits for the
// next rising edge of the (already synchronised) 1PPS input d_in and then raises d_out,
// which the firmware calls data_valid. All boards fed by the same 1PPS thus start
// their streams on the same second. d_out stays high until reset, or until arm falls,
// after which a new capture can be armed.
//
// Interface: clk, reset (synchronous, active high), arm, d_in -> d_out.
// Timing: d_out rises on the clock edge after the first cycle in which d_in is high
// having been low in the previous cycle, while armed. An edge already under way when
// arm rises is not used. Edge-after-arm behaviour follows the paper; the reaction to
// arm falling and the reset polarity are this design's choices.
module alarm_trigger_clocked_pps (
  input  logic clk,
  input  logic reset,
  input  logic arm,
  input  logic d_in,
  output logic d_out
);
  typedef enum logic [1:0] {IDLE, ARMED, RUNNING} state_t;
  state_t state;
  logic   d_prev;

  always_ff @(posedge clk) begin
    if (reset) begin
      state  <= IDLE;
      d_prev <= 1'b1;
    end else begin
      d_prev <= d_in;
      unique case (state)
        IDLE:    if (arm) state <= ARMED;
        ARMED:   if (!arm) state <= IDLE;
                 else if (d_in && !d_prev) state <= RUNNING;
        RUNNING: if (!arm) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign d_out = (state == RUNNING);
endmodule
