// event_buffer: on-board waveform memory of the acquisition fabric.
//
// Every triggered event becomes one record of PRE_SAMPLES + POST_SAMPLES
// samples (8 + 192 = 200 in the paper) plus its time stamp and event number.
// Records live in a ring of N_SLOTS slots and are streamed out, oldest first,
// to the processor. Only triggered windows are ever written, which is the
// paper's point: the idle baseline between pulses is never stored.
//
// Write side. In the trigger cycle (`trig`) the block takes the pre-trigger
// samples, all at once, as one wide word into a per-slot pre-trigger memory,
// and the time stamp and event number into a metadata memory. The trigger
// sample and the following POST_SAMPLES-1 samples arrive one per cycle with
// `post_valid`/`post_idx` and go into the post-trigger memory at
// slot*POST_SAMPLES + post_idx. The record is committed (`stored`, one-cycle
// pulse) with the sample marked `post_last`. Splitting pre- and post-trigger
// samples over two memories lets one event's pre-trigger samples come from
// the tail of the previous event's window without a second write port. An
// event that finds all N_SLOTS slots full is not stored; `dropped` pulses in
// its trigger cycle.
//
// Read side. A valid/ready stream gives one sample per beat: `m_index` 0..7
// are the pre-trigger samples, 8 the trigger sample, 199 the last sample
// (`m_last`); `m_timestamp` and `m_event` hold the record's metadata for all
// its beats. Memories are read synchronously, so a beat is fetched in one
// cycle and offered in the next: the stream runs at most one beat every two
// cycles. The slot is freed after its last beat.
//
// The number of slots (32), the split memories, the stream format and its
// rate are this design's choices; the paper only says that captured
// waveforms are saved in on-board memory and streamed.
module event_buffer
  import photonids_pkg::*;
#(
  parameter int PRE_SAMPLES  = photonids_pkg::PRE_LEN,
  parameter int POST_SAMPLES = photonids_pkg::POST_LEN,
  parameter int N_SLOTS      = 32,
  parameter int TS_W         = photonids_pkg::TSTAMP_W,
  parameter int CNT_W        = photonids_pkg::COUNT_W,
  localparam int EVENT_LEN   = PRE_SAMPLES + POST_SAMPLES,
  localparam int PIDX_W      = $clog2(POST_SAMPLES),
  localparam int EIDX_W      = $clog2(EVENT_LEN),
  localparam int SLOT_W      = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int FILL_W      = $clog2(N_SLOTS + 1),
  localparam int ADDR_W      = $clog2(N_SLOTS * POST_SAMPLES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // write side, from the trigger FSM, the pre-trigger line and event_stamp
  input  logic              trig,
  input  sample_t           pre [PRE_SAMPLES],
  input  logic [TS_W-1:0]   ts_in,
  input  logic [CNT_W-1:0]  evt_in,
  input  logic              post_valid,
  input  logic [PIDX_W-1:0] post_idx,
  input  logic              post_last,
  input  sample_t           sample,
  output logic              stored,
  output logic              dropped,
  output logic [FILL_W-1:0] fill,
  // read-out stream to the processor
  output logic              m_valid,
  input  logic              m_ready,
  output sample_t           m_sample,
  output logic [EIDX_W-1:0] m_index,
  output logic              m_last,
  output logic [TS_W-1:0]   m_timestamp,
  output logic [CNT_W-1:0]  m_event
);

  typedef logic [PRE_SAMPLES*SAMPLE_W-1:0] pre_word_t;

  pre_word_t        pre_mem  [N_SLOTS];
  sample_t          post_mem [N_SLOTS*POST_SAMPLES];
  logic [TS_W-1:0]  ts_mem   [N_SLOTS];
  logic [CNT_W-1:0] evt_mem  [N_SLOTS];

  // ---------------------------------------------------------------- write
  logic [SLOT_W-1:0] wslot_q;
  logic              wactive_q;
  logic              accept, wr_post, commit;
  logic [FILL_W-1:0] fill_q;
  pre_word_t         pre_word;

  always_comb
    for (int i = 0; i < PRE_SAMPLES; i++) pre_word[i*SAMPLE_W +: SAMPLE_W] = pre[i];

  assign accept  = trig && (fill_q < FILL_W'(N_SLOTS));
  assign dropped = trig && !accept;
  assign wr_post = post_valid && (accept || wactive_q);
  assign commit  = wr_post && post_last;
  assign stored  = commit;

  function automatic logic [SLOT_W-1:0] next_slot(logic [SLOT_W-1:0] s);
    return (s == SLOT_W'(N_SLOTS - 1)) ? '0 : s + SLOT_W'(1);
  endfunction

  function automatic logic [ADDR_W-1:0] post_addr(logic [SLOT_W-1:0] s, logic [EIDX_W-1:0] i);
    return ADDR_W'(s) * ADDR_W'(POST_SAMPLES) + ADDR_W'(i);
  endfunction

  always_ff @(posedge clk) begin
    if (accept) begin
      pre_mem[wslot_q] <= pre_word;
      ts_mem[wslot_q]  <= ts_in;
      evt_mem[wslot_q] <= evt_in;
    end
    if (wr_post) post_mem[post_addr(wslot_q, EIDX_W'(post_idx))] <= sample;
  end

  // ----------------------------------------------------------------- read
  typedef enum logic [1:0] {R_IDLE, R_FETCH, R_VALID} rd_state_e;
  rd_state_e         rstate_q;
  logic [SLOT_W-1:0] rslot_q;
  logic [EIDX_W-1:0] ridx_q;
  pre_word_t         pre_q;
  sample_t           post_q;
  sample_t           pre_sel;
  logic              rd_done;
  logic [EIDX_W-1:0] ridx_post;

  assign ridx_post = (ridx_q >= EIDX_W'(PRE_SAMPLES)) ? ridx_q - EIDX_W'(PRE_SAMPLES) : '0;
  assign m_valid   = (rstate_q == R_VALID);
  assign m_index   = ridx_q;
  assign m_last    = (ridx_q == EIDX_W'(EVENT_LEN - 1));
  assign m_sample  = (ridx_q < EIDX_W'(PRE_SAMPLES)) ? pre_sel : post_q;

  always_comb begin
    pre_sel = '0;
    for (int i = 0; i < PRE_SAMPLES; i++)
      if (ridx_q == EIDX_W'(i)) pre_sel = pre_q[i*SAMPLE_W +: SAMPLE_W];
  end
  assign rd_done   = m_valid && m_ready && m_last;

  always_ff @(posedge clk) begin
    if (rstate_q == R_FETCH) begin
      pre_q       <= pre_mem[rslot_q];
      post_q      <= post_mem[post_addr(rslot_q, ridx_post)];
      m_timestamp <= ts_mem[rslot_q];
      m_event     <= evt_mem[rslot_q];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wslot_q   <= '0;
      wactive_q <= 1'b0;
      fill_q    <= '0;
      rstate_q  <= R_IDLE;
      rslot_q   <= '0;
      ridx_q    <= '0;
    end else begin
      // write pointer
      if (commit)      begin wslot_q <= next_slot(wslot_q); wactive_q <= 1'b0; end
      else if (accept) wactive_q <= 1'b1;
      // committed records not yet read out
      fill_q <= fill_q + FILL_W'(commit) - FILL_W'(rd_done);
      // read sequencer
      unique case (rstate_q)
        R_IDLE:  if (fill_q != '0) rstate_q <= R_FETCH;
        R_FETCH: rstate_q <= R_VALID;
        R_VALID: if (m_ready) begin
          if (m_last) begin
            ridx_q   <= '0;
            rslot_q  <= next_slot(rslot_q);
            rstate_q <= R_IDLE;
          end else begin
            ridx_q   <= ridx_q + EIDX_W'(1);
            rstate_q <= R_FETCH;
          end
        end
        default: rstate_q <= R_IDLE;
      endcase
    end
  end

  assign fill = fill_q;

  // Stream rule: an offered beat stays, unchanged, until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_valid && !m_ready) |=> (m_valid && $stable(m_sample) && $stable(m_index)));
  // A new trigger never comes while a record is still being written.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    !(trig && wactive_q));
  a_fill_range: assert property (@(posedge clk) disable iff (!rst_n)
    fill_q <= FILL_W'(N_SLOTS));

endmodule
