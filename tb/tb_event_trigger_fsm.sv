// tb_event_trigger_fsm: self-checking test of the four-state event trigger.
//
// A random baseline with injected pulses is fed one sample per clock. A
// reference written as plain integer bookkeeping (the cycle where the last
// window ends, samples spent armed) predicts in every cycle whether the
// sample is a trigger, its index in the post-trigger window and the state;
// the DUT must match. The run covers: Start, triggers, samples above the
// threshold inside the inhibition window that must be ignored, back-to-back
// re-triggering right after a window, a Stop while a window is running
// (taken at its end), a Stop while armed, and the armed timeout.
module tb_event_trigger_fsm;
  import photonids_pkg::*;

  localparam int POST = 192;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, stop = 1'b0;
  sample_t threshold = 16'sd2000, sample = '0;
  logic [31:0] armed_timeout = '0;
  acq_state_e state;
  logic trig, post_valid, post_last, timeout_end;
  logic [7:0] post_idx;

  event_trigger_fsm #(.POST_SAMPLES(POST)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_trig = 0, n_inhibited = 0, n_backtoback = 0, n_timeout = 0, n_stop_pend = 0;

  // reference state
  int  ref_state;       // 0 idle, 1 armed, 2 in window
  int  ref_pos;         // index inside window
  int  ref_armed;       // samples spent armed
  bit  ref_stop_pend;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Compare DUT against the reference for the sample on the input now, then
  // advance the reference.
  task automatic step();
    bit exp_trig, exp_valid, exp_last, exp_to;
    int exp_idx;
    exp_trig  = (ref_state == 1) && !stop && (sample > threshold);
    exp_to    = (ref_state == 1) && !stop && !exp_trig && (armed_timeout != 0) &&
                (ref_armed + 1 >= armed_timeout);
    exp_valid = exp_trig || ref_state == 2;
    exp_idx   = exp_trig ? 0 : ref_pos;
    exp_last  = exp_valid && exp_idx == POST - 1;
    #1;
    check(trig == exp_trig, "trig");
    check(post_valid == exp_valid, "post_valid");
    if (exp_valid) check(post_idx == 8'(exp_idx), "post_idx");
    check(post_last == exp_last, "post_last");
    check(timeout_end == exp_to, "timeout_end");
    case (ref_state)
      0: check(state == ST_IDLE, "state idle");
      1: check(state == ST_ARMED, "state armed");
      2: check(state == (ref_pos == 1 ? ST_TRIGGER : ST_INHIBIT), "state window");
      default: ;
    endcase
    if (ref_state == 2 && ref_pos >= 1 && sample > threshold) n_inhibited++;
    if (exp_trig) n_trig++;
    if (exp_to) n_timeout++;
    @(posedge clk);
    #1;
    // advance the reference
    case (ref_state)
      0: if (start) begin ref_state = 1; ref_armed = 0; end
      1: begin
        if (stop || exp_to) ref_state = 0;
        else if (exp_trig) begin ref_state = 2; ref_pos = 1; ref_stop_pend = 0; end
        else ref_armed++;
      end
      2: begin
        if (stop) ref_stop_pend = 1;
        if (ref_pos == POST - 1) begin
          if (ref_stop_pend) n_stop_pend++;
          ref_state = ref_stop_pend ? 0 : 1; ref_armed = 0;
        end else ref_pos++;
      end
      default: ;
    endcase
  endtask

  // one sample of the stimulus: baseline noise, or a pulse sample
  int pulse_left = 0;
  function automatic sample_t next_sample(int force_pulse);
    if (force_pulse != 0) return sample_t'(4000 + $urandom_range(0, 3000));
    if (pulse_left == 0 && $urandom_range(0, 299) == 0) pulse_left = 40;
    if (pulse_left > 0) begin
      pulse_left--;
      return sample_t'(500 + pulse_left * 150);
    end
    return sample_t'(int'($urandom_range(0, 1000)) - 200);
  endfunction

  task automatic run(int n, int force_at = -1);
    for (int i = 0; i < n; i++) begin
      sample = next_sample(i == force_at);
      step();
    end
  endtask

  initial begin
    ref_state = 0; ref_pos = 0; ref_armed = 0; ref_stop_pend = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // idle: pulses must be ignored
    run(50, 10);
    // start and acquire
    start = 1'b1; sample = '0; step(); start = 1'b0;
    run(6000);
    // back-to-back: a pulse sample exactly when a window ends
    while (!(ref_state == 2 && ref_pos == POST - 1)) begin
      sample = next_sample(ref_state == 1 ? 1 : 0); step();
    end
    sample = next_sample(0); step();          // last sample of the window
    sample = next_sample(1);
    if (ref_state == 1 && sample > threshold) n_backtoback++;
    step();
    run(50);
    // stop during a window
    while (ref_state != 2) begin sample = next_sample(1); step(); end
    stop = 1'b1; sample = next_sample(0); step(); stop = 1'b0;
    run(POST + 5);
    check(state == ST_IDLE, "idle after pending stop");
    // restart, stop while armed
    start = 1'b1; sample = '0; step(); start = 1'b0;
    sample = '0; step();
    stop = 1'b1; sample = next_sample(1); step(); stop = 1'b0;
    check(state == ST_IDLE, "idle after stop");
    // armed timeout
    armed_timeout = 32'd100; threshold = 16'sd30000;
    start = 1'b1; sample = '0; step(); start = 1'b0;
    run(150);
    check(state == ST_IDLE, "idle after timeout");
    threshold = 16'sd2000; armed_timeout = '0;

    check(n_trig > 10, "triggers seen");
    check(n_inhibited > 10, "samples above threshold ignored in inhibition");
    check(n_backtoback == 1, "back-to-back trigger");
    check(n_timeout == 1, "armed timeout");
    check(n_stop_pend == 1, "stop taken at window end");
    $display("triggers=%0d inhibited=%0d backtoback=%0d timeout=%0d stop_pend=%0d",
             n_trig, n_inhibited, n_backtoback, n_timeout, n_stop_pend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
