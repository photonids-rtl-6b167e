// tb_acq_regs: register-port test. Checks the reset values, read-back of
// THRESHOLD and TIMEOUT, the one-cycle Start/Stop/Clear pulses from CTRL,
// the status fields and counters presented on the status inputs, the
// coherent 64-bit time read (TS_LO latches TS_HI), and zero for unmapped
// addresses. Expected values are the ones the testbench drives or wrote.
module tb_acq_regs;
  import photonids_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [3:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic rd_valid, start, stop, clear;
  sample_t threshold;
  logic [31:0] armed_timeout;
  acq_state_e state = ST_IDLE;
  logic [5:0] fill = '0;
  logic [31:0] n_trig = '0, n_stored = '0, n_dropped = '0;
  logic [63:0] timestamp = '0;

  acq_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) timestamp <= timestamp + 64'h0000_0001_0000_0001;

  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0, n_clear = 0;
  always @(negedge clk) begin
    n_start += int'(start); n_stop += int'(stop); n_clear += int'(clear);
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 8) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(logic [3:0] a, logic [31:0] d);
    wr_en = 1'b1; wr_addr = a; wr_data = d;
    @(posedge clk); #1;
    wr_en = 1'b0;
  endtask

  task automatic rd(logic [3:0] a, output logic [31:0] d);
    rd_en = 1'b1; rd_addr = a;
    @(posedge clk); #1;
    rd_en = 1'b0;
    check(rd_valid == 1'b1, "rd_valid");
    d = rd_data;
    @(posedge clk); #1;
    check(rd_valid == 1'b0, "rd_valid drops");
  endtask

  logic [31:0] d, lo, hi;
  longint t0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(threshold == 16'sd2000, "threshold reset");
    check(armed_timeout == 0, "timeout reset");
    rd(REG_THRESHOLD, d); check(d == 32'd2000, "threshold read reset");
    wr(REG_THRESHOLD, 32'h0000_F830);            // -2000
    check(threshold == -16'sd2000, "threshold write");
    rd(REG_THRESHOLD, d); check(d == 32'hFFFF_F830, "threshold read sign-extended");
    wr(REG_TIMEOUT, 32'd123456);
    check(armed_timeout == 32'd123456, "timeout write");
    rd(REG_TIMEOUT, d); check(d == 32'd123456, "timeout read");
    // commands: pulse exactly one cycle
    wr(REG_CTRL, 32'h1);
    check(start && !stop && !clear, "start pulse");
    @(posedge clk); #1 check(!start, "start one cycle");
    wr(REG_CTRL, 32'h2);
    check(stop && !start && !clear, "stop pulse");
    wr(REG_CTRL, 32'h4);
    check(clear && !start && !stop, "clear pulse");
    @(posedge clk); #1;
    check(n_start == 1 && n_stop == 1 && n_clear == 1, "pulse counts");
    // status and counters
    state = ST_INHIBIT; fill = 6'd17; n_trig = 32'd99; n_stored = 32'd77; n_dropped = 32'd22;
    rd(REG_STATUS, d);   check(d == {16'd0, 8'd17, 6'd0, 2'd3}, "status");
    rd(REG_N_TRIG, d);   check(d == 32'd99, "n_trig");
    rd(REG_N_STORED, d); check(d == 32'd77, "n_stored");
    rd(REG_N_DROP, d);   check(d == 32'd22, "n_dropped");
    rd(4'hF, d);         check(d == 32'd0, "unmapped");
    // coherent time read: high and low word advance together in this test
    rd(REG_TS_LO, lo);
    rd(REG_TS_HI, hi);
    check(hi == lo, "time read coherent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
