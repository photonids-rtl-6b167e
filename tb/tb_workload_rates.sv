// tb_workload_rates: runs the acquisition fabric, at its default sizes, on
// detector event streams at the count rates of the experiments it was built
// for, and checks that every event is captured as a complete record.
//
// Time base: one clock = one ADC sample at 2 GS/s (200 samples span the
// 100 ns record). Event arrivals are random with exponential gaps at rate
// R = S + B (photons plus dark counts) per second, i.e. a probability of
// R / 2e9 per sample, with a minimum gap of 400 samples so that each pulse
// gives exactly one trigger (at these rates closer pairs are rarer than 1
// in 200). Each regime runs for WINDOW_US microseconds of detector time.
// Regimes: laser data collection at 8000/s; 20 km link with S = 4000/s and
// B = 300, 3000 and 20000/s (dark lab, dim ambient, lights on). The erbium
// emitter (about 22.5/s) would give no event in such a window and is not run.
//
// Checks per event: one record whose time stamp lies 1 to 3 samples after
// the pulse was fired, whose 200 samples reach the pulse height, and whose
// event number counts up; per regime: records = pulses, no drops. It also
// reports the fraction of ADC samples kept, the background suppression the
// event-driven capture provides.
module tb_workload_rates;
  import photonids_pkg::*;

  localparam int     WINDOW_US = 2000;
  localparam longint SAMPLES   = longint'(WINDOW_US) * 2000;  // 2 GS/s

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t adc_sample;
  logic reg_wr_en = 1'b0, reg_rd_en = 1'b0;
  logic [3:0] reg_wr_addr = '0, reg_rd_addr = '0;
  logic [31:0] reg_wr_data = '0, reg_rd_data;
  logic reg_rd_valid;
  logic m_valid, m_ready = 1'b1, m_last;
  sample_t m_sample;
  logic [7:0] m_index;
  logic [63:0] m_timestamp;
  logic [31:0] m_event;
  acq_state_e state;
  logic trig, timeout_end;

  photonids_acq_top dut (.*);

  logic fire = 1'b0;
  int amplitude = 0;
  adc_pulse_model u_adc (.clk, .fire, .amplitude, .sample(adc_sample));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  longint cyc = 0;
  longint fired [$];
  int n_records = 0, next_evt = 0, peak = 0;
  longint stored_samples = 0;

  always @(negedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      if (m_index == 0) peak = -32768;
      if (int'(m_sample) > peak) peak = int'(m_sample);
      stored_samples++;
      if (m_last) begin
        check(fired.size() > 0, "record with a fired pulse");
        if (fired.size() > 0) begin
          automatic longint f = fired.pop_front();
          check(m_timestamp >= 64'(f + 1) && m_timestamp <= 64'(f + 3), "trigger time");
        end
        check(peak > 4000, "record holds the pulse peak");
        check(m_event == 32'(next_evt), "event number");
        next_evt++; n_records++;
      end
    end
    cyc++;
  end

  task automatic tick(longint n = 1);
    for (longint i = 0; i < n; i++) begin @(posedge clk); #1; end
  endtask

  task automatic wr(logic [3:0] a, logic [31:0] d);
    reg_wr_en = 1'b1; reg_wr_addr = a; reg_wr_data = d;
    tick();
    reg_wr_en = 1'b0;
  endtask

  task automatic rd(logic [3:0] a, output logic [31:0] d);
    reg_rd_en = 1'b1; reg_rd_addr = a;
    tick();
    reg_rd_en = 1'b0;
    d = reg_rd_data;
  endtask

  task automatic regime(string name, real s_rate, real b_rate);
    real p, u;
    longint t = 0, gap;
    int n_ph = 0, n_dc = 0, rec0 = n_records;
    longint st0 = stored_samples;
    logic [31:0] d0, d1, drops;
    rd(REG_N_TRIG, d0);
    p = (s_rate + b_rate) / 2.0e9;
    while (1) begin
      u = real'($urandom_range(1, 1000000)) / 1.0e6;
      gap = longint'(-$ln(u) / p);
      if (gap < 400) gap = 400;
      if (t + gap >= SAMPLES) break;
      tick(gap - 1); t += gap;
      fire = 1'b1; amplitude = $urandom_range(5500, 7000);
      fired.push_back(cyc);
      if (real'($urandom_range(0, 999999)) < 1.0e6 * s_rate / (s_rate + b_rate)) n_ph++; else n_dc++;
      tick(); fire = 1'b0;
    end
    tick(SAMPLES - t + 1000);
    rd(REG_N_TRIG, d1);
    rd(REG_N_DROP, drops);
    check(d1 - d0 == 32'(n_ph + n_dc), "triggers = pulses");
    check(n_records - rec0 == n_ph + n_dc, "records = pulses");
    check(drops == 0, "no drops");
    check(n_ph + n_dc > 0, "regime produced events");
    $display("%-28s rate %7.0f/s: %0d photons + %0d dark counts -> %0d records, %0d of %0d samples kept (%.3f%%)",
             name, s_rate + b_rate, n_ph, n_dc, n_records - rec0, stored_samples - st0, SAMPLES,
             100.0 * real'(stored_samples - st0) / real'(SAMPLES));
  endtask

  initial begin
    tick(3);
    rst_n = 1'b1;
    tick(10);
    wr(REG_THRESHOLD, 32'd2500);
    wr(REG_CTRL, 32'h1);
    tick(20);
    regime("laser data collection", 8000.0, 0.0);
    regime("20 km link, dark lab", 4000.0, 300.0);
    regime("20 km link, dim ambient", 4000.0, 3000.0);
    regime("20 km link, lights on", 4000.0, 20000.0);
    check(fired.size() == 0, "every pulse read out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
