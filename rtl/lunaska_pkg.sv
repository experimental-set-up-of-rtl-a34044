// lunaska_pkg: constants and types shared by the pulse-trigger sampler.
//
// The sampler digitises two linear polarisations (A and B) of one antenna,
// watches every sample for a voltage magnitude above an adjustable threshold,
// and on a trigger returns the recent history of both polarisations with a
// sample-accurate time-stamp. The numbers below are the defaults of that
// design: 8-bit samples and a history buffer of up to 16,320 samples per
// polarisation are the published figures; the fabric width of 8 samples per
// clock (2.048 GS/s carried on a 256 MHz clock) and the 64-bit time-stamp are
// this implementation's own choices.
package lunaska_pkg;

  // Published sizes.
  localparam int unsigned SAMPLE_W_DEF    = 8;      // ADC precision, bits
  localparam int unsigned BUF_SAMPLES_DEF = 16320;  // longest buffer, samples

  // Implementation choices.
  localparam int unsigned LANES_DEF = 8;   // samples per fabric clock
  localparam int unsigned TS_W_DEF  = 64;  // time-stamp width, samples

  // Second header word of a readout frame: field positions (LSB first).
  localparam int unsigned HDR_LEN_LSB  = 0;   // buffer length in words, 16 bits
  localparam int unsigned HDR_LEN_W    = 16;
  localparam int unsigned HDR_LANE_LSB = 16;  // lane of first sample over threshold, 8 bits
  localparam int unsigned HDR_LANE_W   = 8;
  localparam int unsigned HDR_HITA_BIT = 24;  // polarisation A exceeded its threshold
  localparam int unsigned HDR_HITB_BIT = 25;  // polarisation B exceeded its threshold

  // Trigger/capture controller states.
  typedef enum logic [1:0] {
    CAP_ACQUIRE = 2'd0,  // buffers recording; armed once enough history is held
    CAP_POST    = 2'd1,  // triggered; recording the post-trigger samples
    CAP_READOUT = 2'd2   // buffers frozen and being returned (dead time)
  } cap_state_t;

  // Readout streamer states.
  typedef enum logic [2:0] {
    RD_IDLE  = 3'd0,
    RD_HDR0  = 3'd1,  // header word 0: trigger time-stamp
    RD_HDR1  = 3'd2,  // header word 1: length, lane, hit flags
    RD_ISSUE = 3'd3,  // read request to both buffers
    RD_LOAD  = 3'd4,  // read data arrives, captured into the output register
    RD_SEND  = 3'd5   // data word offered on the output stream
  } rd_state_t;

endpackage
