// tb_event_buffer: self-checking test of the waveform record buffer.
//
// A driver plays the part of the trigger FSM and the pre-trigger line: it
// sends events (trigger cycle with 8 random pre-trigger samples, time stamp
// and event number, then 192 random post-trigger samples), with random gaps
// and some back-to-back. A reader takes the output stream with a random
// ready. The testbench keeps its own count of stored and read records to
// predict which events find the buffer full; accepted events go into a
// queue of expected records and every beat read out is compared with it
// (sample, index, last, time stamp, event number). With ready held high the
// record must stream out at one beat every two cycles (399 cycles from first
// to last beat). The buffer is shrunk to 4 slots so that it fills up.
module tb_event_buffer;
  import photonids_pkg::*;

  localparam int PRE = 8, POST = 192, LEN = PRE + POST, SLOTS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trig = 1'b0, post_valid = 1'b0, post_last = 1'b0;
  sample_t pre [PRE];
  logic [63:0] ts_in = '0;
  logic [31:0] evt_in = '0;
  logic [7:0] post_idx = '0;
  sample_t sample = '0;
  logic stored, dropped;
  logic [2:0] fill;
  logic m_valid, m_ready = 1'b0, m_last;
  sample_t m_sample;
  logic [7:0] m_index;
  logic [63:0] m_timestamp;
  logic [31:0] m_event;

  event_buffer #(.PRE_SAMPLES(PRE), .POST_SAMPLES(POST), .N_SLOTS(SLOTS)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    sample_t     s [LEN];
    logic [63:0] ts;
    logic [31:0] evt;
  } rec_t;

  rec_t expq [$];
  rec_t cur;
  int checks = 0, failures = 0;
  int n_sent = 0, n_drop = 0, n_store = 0, n_read = 0, n_b2b = 0;
  int ref_fill = 0, beat = 0;
  bit cur_accepted = 0;
  int ready_mode = 0;         // 0 random, 1 always ready, 2 never ready
  int first_beat_cyc = -1, cyc = 0, full_rate_ok = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ driver
  task automatic send_event(int id, bit b2b);
    rec_t r;
    for (int i = 0; i < PRE; i++) r.s[i] = sample_t'($urandom);
    for (int i = PRE; i < LEN; i++) r.s[i] = sample_t'($urandom);
    r.ts = {$urandom, $urandom}; r.evt = 32'(id);
    if (!b2b) begin
      repeat ($urandom_range(1, 300)) begin
        trig = 0; post_valid = 0; post_last = 0; sample = sample_t'($urandom);
        @(posedge clk); #1;
      end
    end else n_b2b++;
    cur = r;
    for (int i = 0; i < POST; i++) begin
      trig       = (i == 0);
      if (i == 0) begin
        for (int k = 0; k < PRE; k++) pre[k] = r.s[k];
        ts_in = r.ts; evt_in = r.evt;
      end
      post_valid = 1'b1;
      post_idx   = 8'(i);
      post_last  = (i == POST - 1);
      sample     = r.s[PRE + i];
      @(posedge clk); #1;
    end
    trig = 0; post_valid = 0; post_last = 0;
    n_sent++;
  endtask

  // ----------------------------------------------------------- monitor
  always @(negedge clk) if (rst_n) begin
    cyc++;
    // trigger: accepted unless the buffer is full
    if (trig) begin
      cur_accepted = (ref_fill < SLOTS);
      check(dropped == !cur_accepted, "dropped");
      if (!cur_accepted) n_drop++;
    end else check(!dropped, "no spurious drop");
    check(stored == (post_last && cur_accepted), "stored");
    if (stored) n_store++;
    check(fill == 3'(ref_fill), "fill");
    // stream
    if (m_valid) begin
      check(expq.size() > 0, "beat with a record present");
      if (expq.size() > 0) begin
        check(m_index == 8'(beat), "m_index");
        check(m_sample == expq[0].s[beat], "m_sample");
        check(m_last == (beat == LEN - 1), "m_last");
        check(m_timestamp == expq[0].ts, "m_timestamp");
        check(m_event == expq[0].evt, "m_event");
      end
    end
    if (m_valid && m_ready) begin
      if (beat == 0) first_beat_cyc = cyc;
      if (m_last) begin
        if (ready_mode == 1 && cyc - first_beat_cyc == 2 * (LEN - 1)) full_rate_ok++;
        expq.pop_front(); beat = 0; n_read++;
        ref_fill--;
      end else beat++;
    end
    if (stored) begin expq.push_back(cur); ref_fill++; end
  end

  always @(posedge clk) begin
    #1;
    unique case (ready_mode)
      0: m_ready = ($urandom_range(0, 2) != 0);
      1: m_ready = 1'b1;
      default: m_ready = 1'b0;
    endcase
  end

  initial begin
    for (int k = 0; k < PRE; k++) pre[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // phase 1: random traffic, random ready
    for (int e = 0; e < 12; e++) send_event(e, e % 4 == 3);
    // phase 2: reader stalled: the buffer fills and events are dropped
    ready_mode = 2;
    for (int e = 12; e < 20; e++) send_event(e, e % 2 == 0);
    // phase 3: drain at full rate
    ready_mode = 1;
    while (expq.size() > 0) @(posedge clk);
    #1;
    for (int e = 20; e < 24; e++) send_event(e, 0);
    repeat (2000) @(posedge clk);
    #1;
    check(expq.size() == 0, "all records read");
    check(n_drop >= 3, "events dropped when full");
    check(n_b2b >= 5, "back-to-back events");
    check(full_rate_ok >= 4, "full-rate read-out timing");
    check(n_read == n_store && n_store + n_drop == n_sent, "record accounting");
    $display("sent=%0d stored=%0d dropped=%0d read=%0d b2b=%0d fullrate=%0d",
             n_sent, n_store, n_drop, n_read, n_b2b, full_rate_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
