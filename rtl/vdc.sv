// The VDC chip: NCH (four) VCSEL driver channels.
//
// Each channel converts an LVDS input into the bright/dim current of one VCSEL
// of a common-cathode array: an LVDS receiver (vdc_lvds_receiver) switches a
// differential driver (vdc_driver). The amplitude pad V_Iset and the dim
// current pad Tunepad are shared by all channels, and the chip reports its
// total supply current, which the dummy branches keep independent of the
// data. Everything here is combinational; currents are real values in A.
// Four channels per chip follows the published description; sharing V_Iset
// and Tunepad among the channels is this design's choice.
module vdc
  import optolink_pkg::*;
#(
  parameter int unsigned NCH = NUM_CHANNELS
) (
  input  logic [NCH-1:0] in_p,            // LVDS inputs, true wires
  input  logic [NCH-1:0] in_n,            // LVDS inputs, complement wires
  input  real            v_iset,          // V_Iset pad, V
  input  real            v_tune,          // Tunepad, V
  output real            i_anode [NCH],   // VCSEL anode currents, A
  output real            i_supply_total   // chip supply current, A
);

  logic [NCH-1:0] bright;
  real            i_dummy  [NCH];
  real            i_supply [NCH];

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    vdc_lvds_receiver u_rx (
      .in_p (in_p[c]),
      .in_n (in_n[c]),
      .out  (bright[c])
    );
    vdc_driver u_drv (
      .bright   (bright[c]),
      .v_iset   (v_iset),
      .v_tune   (v_tune),
      .i_anode  (i_anode[c]),
      .i_dummy  (i_dummy[c]),
      .i_supply (i_supply[c])
    );
  end

  always_comb begin
    i_supply_total = 0.0;
    for (int c = 0; c < NCH; c++) i_supply_total += i_supply[c];
  end

endmodule
