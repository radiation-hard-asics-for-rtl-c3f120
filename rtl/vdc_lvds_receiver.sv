// Behavioural model: the LVDS input receiver of one VDC channel.
//
// It turns the differential input pair into the single-ended signal that
// switches the VCSEL driver. The pair is modelled by its two logic levels:
// (1,0) drives the output high (VCSEL bright), (0,1) low (dim). A pair whose
// two wires sit at the same level carries no differential signal; the model
// then outputs 0, so an open or shorted input leaves the VCSEL dim. That
// fail-safe choice is this model's; the published description only says
// that the receiver converts the differential input into a single-ended
// signal. No delay is modelled (the 80 Mbit/s link needs under 12.5 ns).
module vdc_lvds_receiver (
  input  logic in_p,  // LVDS input, true wire
  input  logic in_n,  // LVDS input, complement wire
  output logic out    // single-ended output to the driver
);

  always_comb out = in_p & ~in_n;

endmodule
