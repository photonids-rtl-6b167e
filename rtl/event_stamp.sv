// event_stamp: time base and event counters of the acquisition fabric.
//
// The paper says every validated event is time-stamped and counted. This
// block keeps a free-running counter of ADC sample periods (one per clock)
// whose value in the trigger cycle is the event's time stamp, and three
// event counters: triggers seen, records stored and events dropped because
// the waveform buffer was full. The event number handed to the buffer is the
// trigger count before the increment, so events are numbered 0, 1, 2, ...
// `clear` (a processor command) zeroes the time base and all counters in the
// next cycle; counting wraps silently. The widths (64-bit time, 32-bit
// counts) are this design's choice.
module event_stamp #(
  parameter int TS_W  = photonids_pkg::TSTAMP_W,
  parameter int CNT_W = photonids_pkg::COUNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             trig,
  input  logic             stored,
  input  logic             dropped,
  output logic [TS_W-1:0]  timestamp,
  output logic [CNT_W-1:0] n_trig,
  output logic [CNT_W-1:0] n_stored,
  output logic [CNT_W-1:0] n_dropped
);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      timestamp <= '0;
      n_trig    <= '0;
      n_stored  <= '0;
      n_dropped <= '0;
    end else begin
      timestamp <= timestamp + TS_W'(1);
      if (trig)    n_trig    <= n_trig    + CNT_W'(1);
      if (stored)  n_stored  <= n_stored  + CNT_W'(1);
      if (dropped) n_dropped <= n_dropped + CNT_W'(1);
    end
  end

endmodule
