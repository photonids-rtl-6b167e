// event_trigger_fsm: the four-state event trigger of the acquisition fabric.
//
// States IDLE, ARMED, TRIGGER and INHIBITION and their transitions
// (Start, Event, Wait, Inhibit End, End) follow the paper. In ARMED every ADC
// sample is compared with a signed threshold; the first sample strictly
// above it is the trigger sample (`trig`, combinational, in the same cycle)
// and the FSM moves to TRIGGER for one sample and then to INHIBITION, where
// no comparison is made. The trigger sample plus the samples of TRIGGER and
// INHIBITION form the post-trigger window of POST_SAMPLES samples (192), the
// length the paper gives; `post_valid`/`post_idx`/`post_last` mark them so
// the waveform buffer can store them. When the window ends the FSM returns
// to ARMED, and the next sample may already trigger again.
//
// Choices of this design, where the paper gives no detail:
//  * Start is a command pulse from the processor (`start`).
//  * End (ARMED -> IDLE) happens on a `stop` pulse, or when `armed_timeout`
//    samples in a row pass without an event (0 disables the timeout); the
//    paper only says the system falls back to IDLE "if no further signals
//    arrive". A stop that comes during TRIGGER/INHIBITION is held and taken
//    when the window ends, so a started record is always complete.
//  * One ADC sample per clock; synchronous active-low reset to IDLE.
module event_trigger_fsm
  import photonids_pkg::*;
#(
  parameter int POST_SAMPLES = photonids_pkg::POST_LEN,
  parameter int TIMEOUT_W    = 32,
  localparam int IDX_W       = $clog2(POST_SAMPLES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 stop,
  input  sample_t              threshold,
  input  logic [TIMEOUT_W-1:0] armed_timeout,
  input  sample_t              sample,
  output acq_state_e           state,
  output logic                 trig,
  output logic                 post_valid,
  output logic [IDX_W-1:0]     post_idx,
  output logic                 post_last,
  output logic                 timeout_end
);

  acq_state_e           state_q, state_d;
  logic [IDX_W-1:0]     post_cnt_q;
  logic [TIMEOUT_W-1:0] armed_cnt_q;
  logic                 stop_pend_q;
  logic                 in_window;

  assign state     = state_q;
  assign in_window = (state_q == ST_TRIGGER) || (state_q == ST_INHIBIT);

  // Event: first sample above the threshold while armed.
  assign trig       = (state_q == ST_ARMED) && !stop && (sample > threshold);
  assign post_valid = trig || in_window;
  assign post_idx   = trig ? '0 : post_cnt_q;
  assign post_last  = post_valid && (post_idx == IDX_W'(POST_SAMPLES - 1));

  assign timeout_end = (state_q == ST_ARMED) && !stop && !trig &&
                       (armed_timeout != '0) &&
                       (armed_cnt_q >= armed_timeout - TIMEOUT_W'(1));

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      ST_IDLE:    if (start) state_d = ST_ARMED;
      ST_ARMED: begin
        if (stop || timeout_end) state_d = ST_IDLE;
        else if (trig)           state_d = ST_TRIGGER;
      end
      ST_TRIGGER: state_d = ST_INHIBIT;
      ST_INHIBIT: if (post_last) state_d = (stop_pend_q || stop) ? ST_IDLE : ST_ARMED;
      default:    state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= ST_IDLE;
      post_cnt_q  <= '0;
      armed_cnt_q <= '0;
      stop_pend_q <= 1'b0;
    end else begin
      state_q <= state_d;
      // Position inside the post-trigger window.
      if (trig)           post_cnt_q <= IDX_W'(1);
      else if (in_window) post_cnt_q <= post_cnt_q + IDX_W'(1);
      // Samples spent in ARMED without an event.
      if (state_d == ST_ARMED && state_q == ST_ARMED) armed_cnt_q <= armed_cnt_q + TIMEOUT_W'(1);
      else                                           armed_cnt_q <= '0;
      // A stop during a capture window is taken when the window ends.
      if (!in_window)  stop_pend_q <= 1'b0;
      else if (stop)   stop_pend_q <= 1'b1;
    end
  end

  // The window never runs past its last sample, and a trigger only comes
  // from ARMED.
  a_idx_range: assert property (@(posedge clk) disable iff (!rst_n)
    post_valid |-> post_idx < IDX_W'(POST_SAMPLES));
  a_window_end: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_INHIBIT && post_last) |=> state_q inside {ST_ARMED, ST_IDLE});
  a_trig_then_trigger: assert property (@(posedge clk) disable iff (!rst_n)
    trig |=> state_q == ST_TRIGGER);

  initial assert (POST_SAMPLES >= 3) else $error("POST_SAMPLES must be at least 3");

endmodule
