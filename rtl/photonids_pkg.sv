// photonids_pkg: types and constants shared by the event-driven acquisition
// fabric.
//
// The capture window sizes (8 samples before the trigger, 192 from the
// trigger onwards, 200 per event) and the four acquisition states follow the
// paper. The 16-bit signed sample word is this design's choice: the
// printed ADC amplitudes run from about -500 to 8000, which needs a signed
// word wider than the 12-bit converter code, and 16 bits is the usual
// container for RFSoC ADC samples.
package photonids_pkg;

  localparam int SAMPLE_W     = 16;
  localparam int PRE_LEN  = 8;
  localparam int POST_LEN = 192;
  localparam int EVT_LEN  = PRE_LEN + POST_LEN;  // 200 samples
  localparam int TSTAMP_W = 64;
  localparam int COUNT_W  = 32;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Acquisition states of the event-driven trigger.
  typedef enum logic [1:0] {
    ST_IDLE    = 2'd0,
    ST_ARMED   = 2'd1,
    ST_TRIGGER = 2'd2,
    ST_INHIBIT = 2'd3
  } acq_state_e;

  // Register map of acq_regs (word addresses).
  localparam logic [3:0] REG_CTRL      = 4'h0;  // W: bit0 start, bit1 stop, bit2 clear
  localparam logic [3:0] REG_THRESHOLD = 4'h1;  // RW: signed trigger threshold
  localparam logic [3:0] REG_TIMEOUT   = 4'h2;  // RW: armed timeout in samples, 0 = off
  localparam logic [3:0] REG_STATUS    = 4'h3;  // R: [1:0] state, [15:8] buffer fill
  localparam logic [3:0] REG_N_TRIG    = 4'h4;  // R: triggered events
  localparam logic [3:0] REG_N_STORED  = 4'h5;  // R: events stored in the buffer
  localparam logic [3:0] REG_N_DROP    = 4'h6;  // R: events lost to a full buffer
  localparam logic [3:0] REG_TS_LO     = 4'h7;  // R: sample time, low word
  localparam logic [3:0] REG_TS_HI     = 4'h8;  // R: sample time, high word

endpackage
