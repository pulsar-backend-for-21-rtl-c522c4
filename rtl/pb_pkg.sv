// Shared constants and types of the pulsar data-acquisition firmware.
//
// The numbers here are the ones the design is built around: eight ADC streams per
// board, eight signed 16-bit samples per AXI-Stream beat from the data converter,
// 8-bit samples in the UDP payload, a 512-bit (64-byte) bus towards the 100 GbE block,
// and 64 such beats (4096 samples) per UDP payload, preceded by a 64-bit packet
// counter. The stream number travels as a 3-bit AXI-Stream tid.
package pb_pkg;
  localparam int unsigned N_STREAMS     = 8;    // ADC streams per board
  localparam int unsigned N_SAMPLES     = 8;    // samples per ADC beat
  localparam int unsigned ADC_W         = 16;   // bits per sample from the converter
  localparam int unsigned SMP_W         = 8;    // bits per sample in the payload
  localparam int unsigned NARROW_W      = N_SAMPLES * SMP_W;   // 64
  localparam int unsigned WIDE_W        = 512;  // bus width of the 100 GbE block
  localparam int unsigned KEEP_W        = WIDE_W / 8;
  localparam int unsigned PKT_BEATS     = 64;   // 512-bit beats per payload
  localparam int unsigned TID_W         = 3;
  localparam int unsigned HDR_W         = 64;   // packet counter

  // One 512-bit AXI-Stream beat with its sideband, as carried between FIFOs.
  typedef struct packed {
    logic [TID_W-1:0]  tid;
    logic              tlast;
    logic [WIDE_W-1:0] tdata;
  } wide_beat_t;

  localparam int unsigned WIDE_BEAT_W = $bits(wide_beat_t);
endpackage
