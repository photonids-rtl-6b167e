// tb_photonids_acq_top: end-to-end test of the acquisition fabric at its
// default sizes (8 + 192 samples per event, 32 record slots).
//
// A behavioural pulse model stands in for detector, amplifier and ADC. The
// testbench configures the fabric through the register port the way the
// processor would, fires detector pulses and reads the record stream. An
// independent reference, written from the described behaviour (arm on
// Start, first sample above threshold triggers, 192-sample window without
// comparison, buffer of 32 records, events dropped when it is full),
// follows every cycle and predicts each trigger; every record read out is
// compared sample by sample with the ADC samples the testbench saw, and the
// time stamps, event numbers, counters and status registers are checked.
//
// Each mechanism is made to happen and counted; one that never happens
// counts as a failure: trigger, pulse tail or second pulse ignored during
// inhibition, re-trigger in the first sample after a window (pile-up),
// stream back-pressure, buffer full and events dropped, Stop while armed,
// Stop during a window (taken at its end), armed timeout back to IDLE,
// pulses ignored in IDLE, and Clear of the counters.
module tb_photonids_acq_top;
  import photonids_pkg::*;

  localparam int PRE = 8, POST = 192, LEN = 200, SLOTS = 32, THR = 2500;

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t adc_sample;
  logic reg_wr_en = 1'b0, reg_rd_en = 1'b0;
  logic [3:0] reg_wr_addr = '0, reg_rd_addr = '0;
  logic [31:0] reg_wr_data = '0, reg_rd_data;
  logic reg_rd_valid;
  logic m_valid, m_ready = 1'b0, m_last;
  sample_t m_sample;
  logic [7:0] m_index;
  logic [63:0] m_timestamp;
  logic [31:0] m_event;
  acq_state_e state;
  logic trig, timeout_end;

  photonids_acq_top dut (.*);

  logic fire = 1'b0;
  int   amplitude = 0;
  adc_pulse_model u_adc (.clk, .fire, .amplitude, .sample(adc_sample));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------------- reference
  typedef struct { int tc; int evt; } rec_t;
  sample_t adc [$];
  rec_t    expq [$];
  int cyc = 0;
  int ref_state = 0, ref_pos = 0, ref_armed = 0, ref_fill = 0;
  bit ref_stop_pend = 0, ref_prev_window = 0, cur_acc = 0;
  int ref_ntrig = 0, ref_nstored = 0, ref_ndrop = 0;
  int cur_tc = 0, cur_evt = 0, beat = 0;
  bit start_vis = 0, stop_vis = 0, clear_vis = 0, wr_start = 0, wr_stop = 0, wr_clear = 0;
  int thr_vis = 2000, tmo_vis = 0, thr_wr = -1, tmo_wr = -1;
  int ready_mode = 0;
  // mechanism counters
  int n_trig = 0, n_inhibit = 0, n_pileup = 0, n_stall = 0, n_drop = 0, n_stop_armed = 0,
      n_stop_pend = 0, n_timeout = 0, n_idle_ignored = 0, n_clear = 0, n_read = 0;

  always @(negedge clk) if (rst_n) begin
    automatic sample_t s = adc_sample;
    automatic bit e_trig, e_to;
    adc.push_back(s);
    // commands written in the previous cycle are visible now
    start_vis = wr_start; stop_vis = wr_stop; clear_vis = wr_clear;
    if (thr_wr >= 0) thr_vis = thr_wr;
    if (tmo_wr >= 0) tmo_vis = tmo_wr;
    wr_start = reg_wr_en && reg_wr_addr == REG_CTRL && reg_wr_data[0];
    wr_stop  = reg_wr_en && reg_wr_addr == REG_CTRL && reg_wr_data[1];
    wr_clear = reg_wr_en && reg_wr_addr == REG_CTRL && reg_wr_data[2];
    thr_wr   = (reg_wr_en && reg_wr_addr == REG_THRESHOLD) ? int'(signed'(reg_wr_data[15:0])) : -1;
    tmo_wr   = (reg_wr_en && reg_wr_addr == REG_TIMEOUT) ? int'(reg_wr_data) : -1;

    e_trig = (ref_state == 1) && !stop_vis && (int'(s) > thr_vis);
    e_to   = (ref_state == 1) && !stop_vis && !e_trig && tmo_vis != 0 && ref_armed + 1 >= tmo_vis;
    check(trig == e_trig, "trigger decision");
    check(timeout_end == e_to, "timeout");
    check(state == acq_state_e'(ref_state == 2 ? (ref_pos == 1 ? 2 : 3) : ref_state), "state");
    if (ref_state == 0 && int'(s) > THR) n_idle_ignored++;
    if (ref_state == 2 && int'(s) > thr_vis) n_inhibit++;
    if (e_to) n_timeout++;
    if (e_trig) begin
      n_trig++;
      if (ref_prev_window && ref_armed == 0) n_pileup++;
      cur_tc = cyc; cur_evt = ref_ntrig; ref_ntrig++;
      cur_acc = ref_fill < SLOTS;
      if (!cur_acc) begin ref_ndrop++; n_drop++; end
    end
    // read-out stream
    if (m_valid) begin
      check(expq.size() > 0, "beat with record");
      if (expq.size() > 0) begin
        check(m_index == 8'(beat), "m_index");
        check(m_sample == adc[expq[0].tc - PRE + beat], "m_sample");
        check(m_last == (beat == LEN - 1), "m_last");
        check(m_timestamp == 64'(expq[0].tc), "m_timestamp");
        check(m_event == 32'(expq[0].evt), "m_event");
      end
      if (!m_ready) n_stall++;
    end
    if (m_valid && m_ready) begin
      if (m_last) begin void'(expq.pop_front()); beat = 0; n_read++; ref_fill--; end
      else beat++;
    end
    // advance the reference state
    ref_prev_window = 0;
    case (ref_state)
      0: if (start_vis) begin ref_state = 1; ref_armed = 0; end
      1: begin
        if (stop_vis) begin ref_state = 0; n_stop_armed++; end
        else if (e_to) ref_state = 0;
        else if (e_trig) begin ref_state = 2; ref_pos = 1; ref_stop_pend = 0; end
        else ref_armed++;
      end
      2: begin
        if (stop_vis) ref_stop_pend = 1;
        if (ref_pos == POST - 1) begin
          if (cur_acc) begin
            expq.push_back('{tc: cur_tc, evt: cur_evt}); ref_fill++; ref_nstored++;
          end
          if (ref_stop_pend) n_stop_pend++;
          ref_state = ref_stop_pend ? 0 : 1; ref_armed = 0; ref_prev_window = 1;
        end else ref_pos++;
      end
      default: ;
    endcase
    cyc++;
  end

  always @(posedge clk) begin
    #1;
    unique case (ready_mode)
      0: m_ready = ($urandom_range(0, 2) != 0);
      1: m_ready = 1'b1;
      default: m_ready = 1'b0;
    endcase
  end

  // ------------------------------------------------------------- driver
  task automatic tick(int n = 1);
    repeat (n) begin @(posedge clk); #1; end
  endtask

  task automatic wr(logic [3:0] a, logic [31:0] d);
    reg_wr_en = 1'b1; reg_wr_addr = a; reg_wr_data = d;
    tick();
    reg_wr_en = 1'b0;
  endtask

  task automatic rd(logic [3:0] a, output logic [31:0] d, output int at_cyc);
    reg_rd_en = 1'b1; reg_rd_addr = a; at_cyc = cyc;
    tick();
    reg_rd_en = 1'b0;
    check(reg_rd_valid, "register read valid");
    d = reg_rd_data;
  endtask

  task automatic pulse(int amp);
    fire = 1'b1; amplitude = amp;
    tick();
    fire = 1'b0;
  endtask

  task automatic events(int n, int gap_lo, int gap_hi);
    for (int i = 0; i < n; i++) begin
      tick($urandom_range(gap_lo, gap_hi));
      pulse($urandom_range(5500, 7000));
      if (i % 5 == 2) begin tick(60); pulse(6000); end   // second pulse inside the window
    end
  endtask

  logic [31:0] d;
  int rc;

  initial begin
    tick(3);
    rst_n = 1'b1;
    tick(20);
    wr(REG_THRESHOLD, 32'(THR));
    pulse(6500);                 // not armed yet: ignored
    tick(300);
    wr(REG_CTRL, 32'h1);         // Start
    // phase A: random traffic with a random reader
    events(30, 220, 700);
    // pile-up: pulses every 20 samples keep the signal above threshold, so
    // the fabric re-triggers in the first sample after each window
    repeat (80) begin pulse(7000); tick(19); end
    tick(400);
    // phase B: reader stalled until the 32 slots are full
    ready_mode = 2;
    events(40, 220, 400);
    tick(300);
    // phase C: drain
    ready_mode = 1;
    while (expq.size() > 0 || ref_fill > 0) tick();
    // phase D: Stop during a window, then pulses in IDLE
    pulse(6500); tick(60);
    wr(REG_CTRL, 32'h2);
    tick(300);
    pulse(6500); tick(300);
    // phase E: restart, a few events, Stop while armed
    ready_mode = 0;
    wr(REG_CTRL, 32'h1);
    events(10, 220, 500);
    tick(400);
    wr(REG_CTRL, 32'h2);
    tick(50);
    // phase F: armed timeout
    wr(REG_TIMEOUT, 32'd500);
    wr(REG_CTRL, 32'h1);
    tick(700);
    pulse(6500);
    tick(300);
    ready_mode = 1;
    while (expq.size() > 0 || ref_fill > 0) tick();
    tick(10);
    // registers
    rd(REG_N_TRIG, d, rc);   check(d == 32'(ref_ntrig), "N_TRIG");
    rd(REG_N_STORED, d, rc); check(d == 32'(ref_nstored), "N_STORED");
    rd(REG_N_DROP, d, rc);   check(d == 32'(ref_ndrop), "N_DROP");
    rd(REG_STATUS, d, rc);   check(d == 32'h0, "STATUS idle and empty");
    rd(REG_TS_LO, d, rc);    check(d == 32'(rc), "TS_LO");
    rd(REG_TS_HI, d, rc);    check(d == 32'h0, "TS_HI");
    rd(REG_THRESHOLD, d, rc); check(d == 32'(THR), "THRESHOLD");
    wr(REG_CTRL, 32'h4);     // Clear
    tick(2);
    rd(REG_N_TRIG, d, rc);   check(d == 0, "N_TRIG cleared");
    rd(REG_N_DROP, d, rc);   check(d == 0, "N_DROP cleared");
    rd(REG_TS_LO, d, rc);    check(d < 32'd10, "time cleared");
    if (d < 32'd10) n_clear++;

    check(n_trig > 60,        "mechanism: triggers");
    check(n_inhibit > 100,    "mechanism: samples above threshold ignored in inhibition");
    check(n_pileup > 3,       "mechanism: re-trigger right after a window");
    check(n_stall > 100,      "mechanism: stream back-pressure");
    check(n_drop > 3,         "mechanism: buffer full, events dropped");
    check(n_stop_armed == 1,  "mechanism: stop while armed");
    check(n_stop_pend == 1,   "mechanism: stop during a window");
    check(n_timeout == 1,     "mechanism: armed timeout");
    check(n_idle_ignored > 3, "mechanism: pulses ignored in IDLE");
    check(n_clear == 1,       "mechanism: clear");
    check(n_read == ref_nstored, "every stored record read");
    $display("triggers=%0d stored=%0d dropped=%0d read=%0d inhibited=%0d pileup=%0d stall=%0d",
             n_trig, ref_nstored, n_drop, n_read, n_inhibit, n_pileup, n_stall);
    $display("stop_armed=%0d stop_pend=%0d timeout=%0d idle_ignored=%0d clear=%0d cycles=%0d",
             n_stop_armed, n_stop_pend, n_timeout, n_idle_ignored, n_clear, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
