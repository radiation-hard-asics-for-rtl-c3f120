// Behavioural model (not synthesizable): the VCSEL driver of one VDC channel.
//
// The driver sources current from the positive supply into the anode of a
// VCSEL whose cathode is grounded (common-cathode array). In the dim state it
// carries a standing current of about 1 mA, which keeps the laser switching
// fast; in the bright state the dim current plus an amplitude set by the
// external current Iset. The driver is differential: a dummy branch draws the
// amplitude from the supply in the dim state, so the chip's supply current is
// the same in both states.
//
// Model, currents in A, no delay:
//   Iset   = max(v_iset, 0) / R_ISET          (V_Iset pad)
//   I_dim  = min(max(v_tune, 0) / R_TUNE, I_OUT_MAX)   (Tunepad)
//   I_amp  = min(GAIN * Iset, I_OUT_MAX - I_dim)
//   i_anode  = I_dim + (bright ? I_amp : 0)
//   i_dummy  = bright ? 0 : I_amp
//   i_supply = i_anode + i_dummy = I_dim + I_amp  (constant)
// Published: Iset sets the amplitude, Tunepad the dim current, the ~1 mA dim
// design value, the 0..20 mA output range and the dummy driver. This model's
// choices: linear pad-voltage-to-current conversion (R_ISET, R_TUNE, 1 V ->
// 1 mA), GAIN = 20 (20 mA range reached at Iset = 1 mA), and the clamp at
// 20 mA. The saturation seen in measurement comes from the VCSEL's series
// resistance, which belongs to the laser and is not modelled.
module vdc_driver
#(
  parameter real GAIN      = 20.0,     // amplitude / Iset
  parameter real R_ISET    = 1.0e3,    // V_Iset -> Iset, ohm (1 V -> 1 mA)
  parameter real R_TUNE    = 1.0e3,    // Tunepad -> dim current, ohm (1 V -> 1 mA)
  parameter real I_OUT_MAX = 20.0e-3   // output range limit, A
) (
  input  logic bright,    // from the LVDS receiver: 1 = VCSEL bright
  input  real  v_iset,    // V_Iset pad voltage, V
  input  real  v_tune,    // Tunepad voltage, V
  output real  i_anode,   // current into the VCSEL anode, A
  output real  i_dummy,   // current in the dummy branch, A
  output real  i_supply   // current drawn from the positive supply, A
);

  real i_set, i_dim, i_amp;

  always_comb begin
    i_set = (v_iset > 0.0) ? v_iset / R_ISET : 0.0;
    i_dim = (v_tune > 0.0) ? v_tune / R_TUNE : 0.0;
    if (i_dim > I_OUT_MAX) i_dim = I_OUT_MAX;
    i_amp = GAIN * i_set;
    if (i_dim + i_amp > I_OUT_MAX) i_amp = I_OUT_MAX - i_dim;
    i_anode  = bright ? i_dim + i_amp : i_dim;
    i_dummy  = bright ? 0.0 : i_amp;
    i_supply = i_anode + i_dummy;
  end

endmodule
