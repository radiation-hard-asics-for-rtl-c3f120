// Shared constants of the two opto-link ASICs: the channel count of each
// chip, the bit period of the bi-phase-mark (BPM) stream (one period of the
// 40 MHz bunch-crossing clock) and the decoder's oversampling settings. The
// channel count and the clock are published figures; the oversampling ratio
// and window are this design's choices (see doric_logic). The analog
// models keep their real-valued constants as their own parameters.
package optolink_pkg;

  // Both the VCSEL driver chip (VDC) and the decoder chip (DORIC) have four
  // channels.
  parameter int unsigned NUM_CHANNELS = 4;

  // BPM bit period: one 40 MHz bunch-crossing clock period, in ps.
  parameter int unsigned BPM_BIT_PS = 25_000;

  // Decoder oversampling: OSR samples per BPM bit. 25 ns / 32 = 0.78 ns, the
  // smallest power of two under the 1 ns timing-error budget of the
  // recovered clock.
  parameter int unsigned DORIC_OSR = 32;
  // Half-width, in samples, of the windows in which a transition is
  // accepted as a clock-edge or a data transition.
  parameter int unsigned DORIC_WIN = 4;

endpackage
