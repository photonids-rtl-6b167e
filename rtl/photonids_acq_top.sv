// photonids_acq_top: event-driven waveform acquisition for an SNSPD read out
// by a fast ADC.
//
// The detector pulse, amplified and digitised by the RFSoC's ADC, enters as
// one signed sample per clock (`adc_sample`). The trigger FSM arms on a Start
// command, fires on the first sample above the threshold, and then inhibits
// triggering for the 192-sample post-trigger window. For each trigger the
// event buffer stores 200 samples (the 8 held by the pre-trigger line plus
// the trigger sample and the 191 after it) together with a 64-bit time
// stamp and an event number from event_stamp, and streams stored records
// out on the `m_*` valid/ready port, one sample per beat. The processor
// drives the register port of acq_regs (threshold, timeout, Start, Stop,
// Clear; state, buffer fill, counters and time read-back).
//
// Data path timing: the trigger decision is made in the cycle the sample
// arrives; the sample is written to the buffer at the end of that cycle;
// a record becomes readable two cycles after its last sample; the read-out
// stream runs at most one beat every two cycles.
//
// The block structure and the window sizes follow the paper. The ADC, the
// processor and the analog front end are outside this module: their
// signals are its ports. One sample per clock is a simplification of this
// design; the real converter delivers several samples per fabric clock.
module photonids_acq_top
  import photonids_pkg::*;
#(
  parameter int PRE_SAMPLES  = photonids_pkg::PRE_LEN,
  parameter int POST_SAMPLES = photonids_pkg::POST_LEN,
  parameter int N_SLOTS      = 32,
  localparam int EVENT_LEN   = PRE_SAMPLES + POST_SAMPLES,
  localparam int EIDX_W      = $clog2(EVENT_LEN),
  localparam int FILL_W      = $clog2(N_SLOTS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the RF-ADC
  input  sample_t           adc_sample,
  // processor register port
  input  logic              reg_wr_en,
  input  logic [3:0]        reg_wr_addr,
  input  logic [31:0]       reg_wr_data,
  input  logic              reg_rd_en,
  input  logic [3:0]        reg_rd_addr,
  output logic [31:0]       reg_rd_data,
  output logic              reg_rd_valid,
  // waveform read-out stream to the processor
  output logic              m_valid,
  input  logic              m_ready,
  output sample_t           m_sample,
  output logic [EIDX_W-1:0] m_index,
  output logic              m_last,
  output logic [TSTAMP_W-1:0]   m_timestamp,
  output logic [COUNT_W-1:0]  m_event,
  // observation
  output acq_state_e        state,
  output logic              trig,
  output logic              timeout_end
);

  localparam int PIDX_W = $clog2(POST_SAMPLES);

  logic              start, stop, clear;
  sample_t           threshold;
  logic [31:0]       armed_timeout;
  logic              post_valid, post_last;
  logic [PIDX_W-1:0] post_idx;
  sample_t           pre [PRE_SAMPLES];
  logic              stored, dropped;
  logic [FILL_W-1:0] fill;
  logic [TSTAMP_W-1:0]   timestamp;
  logic [COUNT_W-1:0]  n_trig, n_stored, n_dropped;

  acq_regs #(.TIMEOUT_W(32), .FILL_W(FILL_W)) u_regs (
    .clk, .rst_n,
    .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .rd_en(reg_rd_en), .rd_addr(reg_rd_addr), .rd_data(reg_rd_data), .rd_valid(reg_rd_valid),
    .start, .stop, .clear, .threshold, .armed_timeout,
    .state, .fill, .n_trig, .n_stored, .n_dropped, .timestamp
  );

  event_trigger_fsm #(.POST_SAMPLES(POST_SAMPLES), .TIMEOUT_W(32)) u_trigger (
    .clk, .rst_n, .start, .stop, .threshold, .armed_timeout,
    .sample(adc_sample), .state, .trig, .post_valid, .post_idx, .post_last, .timeout_end
  );

  pretrigger_line #(.PRE_SAMPLES(PRE_SAMPLES)) u_pre (
    .clk, .rst_n, .sample(adc_sample), .pre
  );

  event_stamp u_stamp (
    .clk, .rst_n, .clear, .trig, .stored, .dropped,
    .timestamp, .n_trig, .n_stored, .n_dropped
  );

  event_buffer #(
    .PRE_SAMPLES(PRE_SAMPLES), .POST_SAMPLES(POST_SAMPLES), .N_SLOTS(N_SLOTS)
  ) u_buffer (
    .clk, .rst_n,
    .trig, .pre, .ts_in(timestamp), .evt_in(n_trig),
    .post_valid, .post_idx, .post_last, .sample(adc_sample),
    .stored, .dropped, .fill,
    .m_valid, .m_ready, .m_sample, .m_index, .m_last, .m_timestamp, .m_event
  );

endmodule
