// tb_event_stamp: drives random trigger/stored/dropped strobes and clear
// commands and checks the time base and the three counters against integer
// counts kept by the testbench.
module tb_event_stamp;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, trig = 1'b0, stored = 1'b0, dropped = 1'b0;
  logic [63:0] timestamp;
  logic [31:0] n_trig, n_stored, n_dropped;

  event_stamp dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint t_ref = 0;
  int tr_ref = 0, st_ref = 0, dr_ref = 0, n_clear = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 8) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      trig    = ($urandom_range(0, 3) == 0);
      dropped = trig && ($urandom_range(0, 2) == 0);
      stored  = ($urandom_range(0, 4) == 0);
      clear   = (c % 1000 == 999);
      #1;
      check(timestamp == 64'(t_ref), "timestamp");
      check(n_trig == 32'(tr_ref), "n_trig");
      check(n_stored == 32'(st_ref), "n_stored");
      check(n_dropped == 32'(dr_ref), "n_dropped");
      @(posedge clk); #1;
      if (clear) begin t_ref = 0; tr_ref = 0; st_ref = 0; dr_ref = 0; n_clear++; end
      else begin
        t_ref++;
        tr_ref += int'(trig); st_ref += int'(stored); dr_ref += int'(dropped);
      end
    end
    check(n_clear == 3, "clears exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
