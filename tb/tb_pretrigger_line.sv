// tb_pretrigger_line: checks that the pre-trigger line always holds the
// samples of the previous PRE_SAMPLES cycles, oldest first, and zeros after
// reset. The expectation comes from a record of every sample driven.
module tb_pretrigger_line;
  import photonids_pkg::*;

  localparam int PRE = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  sample_t sample = '0;
  sample_t pre [PRE];
  sample_t history [$];

  pretrigger_line #(.PRE_SAMPLES(PRE)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    #1;
    for (int i = 0; i < PRE; i++) begin
      checks++;
      if (pre[i] != '0) failures++;
    end
    for (int c = 0; c < 500; c++) begin
      sample = sample_t'($urandom);
      history.push_back(sample);
      @(posedge clk); #1;
      for (int i = 0; i < PRE; i++) begin
        automatic int h = history.size() - PRE + i;
        checks++;
        if (pre[i] != (h >= 0 ? history[h] : sample_t'(0))) begin
          failures++;
          if (failures < 5) $display("FAIL cycle %0d pre[%0d]=%0d", c, i, pre[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
