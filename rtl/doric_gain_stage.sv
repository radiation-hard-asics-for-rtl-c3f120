// Behavioural model (not synthesizable): the DORIC analog front end of one
// channel, from the two input currents to the digital BPM signal.
//
// The chip amplifies the PIN-diode current in a single-ended preamp. A second,
// identical preamp whose input sees only a dummy capacitance picks up the same
// supply and ground noise; the differential gain stage subtracts the two, so
// noise common to both channels cancels, and drives the decoder logic. This
// model takes the two input currents (A) and decides the BPM level from their
// difference against a fixed threshold, with no delay:
//   bpm = (i_signal - i_noise) > I_THRESH.
// The signal/noise-channel structure and the subtraction follow the published
// description. The preamp gains, the AC coupling between preamps and gain
// stage, bandwidth and hysteresis are not published and are not modelled; a
// dark PIN is taken to give zero current. The threshold, half of the smallest
// expected signal amplitude (40 uA), is this model's choice: it decodes every
// amplitude in the expected 40..1000 uA range.
module doric_gain_stage
#(
  parameter real I_THRESH = 20.0e-6   // A, half of the 40 uA minimum amplitude
) (
  input  real  i_signal,  // current from the PIN anode (signal input), A
  input  real  i_noise,   // current into the noise input (dummy cap.), A
  output logic bpm        // BPM level to the decoder logic
);

  real i_diff;

  always_comb begin
    i_diff = i_signal - i_noise;
    bpm    = (i_diff > I_THRESH);
  end

endmodule
