// adc_pulse_model: behavioural model (not synthesizable) of the analog front
// end as the acquisition fabric sees it: SNSPD, bias tee, RF amplifier and
// ADC together, reduced to one signed sample per clock.
//
// Between pulses it outputs a noisy baseline (BASELINE +/- NOISE, uniform).
// A one-cycle `fire` starts a detector pulse of height `amplitude`: a
// linear rise over RISE samples, then an exponential decay with time
// constant TAU samples, the fast-rise / slow-decay shape of an SNSPD pulse.
// A new `fire` during a pulse restarts it. The numbers are chosen to look
// like the digitised pulses shown for this detector (peak about 6000-7000
// ADC units, baseline within about +/-1000); they are not a physical model.
module adc_pulse_model
  import photonids_pkg::*;
#(
  parameter int  BASELINE = 300,
  parameter int  NOISE    = 500,
  parameter int  RISE     = 4,
  parameter real TAU      = 30.0
) (
  input  logic    clk,
  input  logic    fire,
  input  int      amplitude,
  output sample_t sample
);

  int  age = -1;      // samples since the pulse started, -1 = no pulse
  int  amp = 0;
  real shape;

  always @(posedge clk) begin
    if (fire) begin
      age = 0;
      amp = amplitude;
    end else if (age >= 0) begin
      age = (age > 20 * int'(TAU)) ? -1 : age + 1;
    end
    if (age < 0)         shape = 0.0;
    else if (age < RISE) shape = real'(age + 1) / real'(RISE);
    else                 shape = $exp(-real'(age - RISE + 1) / TAU);
    sample <= sample_t'(BASELINE + int'($urandom_range(0, 2 * NOISE)) - NOISE +
                        int'(shape * real'(amp)));
  end

endmodule
