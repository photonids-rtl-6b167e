// pretrigger_line: keeps the last PRE_SAMPLES ADC samples so that the part
// of a pulse before the trigger point can be stored with the event.
//
// The paper stores 8 samples before the trigger point of every event; this
// block is the simplest way to have them at hand: a shift register that
// takes one sample per clock. `pre[0]` is the oldest sample and
// `pre[PRE_SAMPLES-1]` the one taken in the previous cycle, so in the cycle
// where the trigger sample is on the input, `pre` holds exactly the samples
// that precede it. It resets to zero (a design choice), so an event in the
// first PRE_SAMPLES cycles after reset carries zeros for the samples that
// were never seen.
module pretrigger_line
  import photonids_pkg::*;
#(
  parameter int PRE_SAMPLES = photonids_pkg::PRE_LEN
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t sample,
  output sample_t pre [PRE_SAMPLES]
);

  sample_t line_q [PRE_SAMPLES];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < PRE_SAMPLES; i++) line_q[i] <= '0;
    end else begin
      for (int i = 0; i < PRE_SAMPLES - 1; i++) line_q[i] <= line_q[i+1];
      line_q[PRE_SAMPLES-1] <= sample;
    end
  end

  assign pre = line_q;

endmodule
