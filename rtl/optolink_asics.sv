// The two ASICs of the ATLAS pixel optical link, as one top level: a DORIC,
// which decodes the bi-phase-mark optical input into the 40 MHz clock and
// command data for the module controller, and a VDC, which turns the
// controller's LVDS data into VCSEL drive current for the return fibre.
//
// On the detector the two chips share a carrier board but no signal: the
// DORIC's outputs go to the module controller and the VDC's inputs come from
// it, so both chips' pins are brought out unchanged. A loop-back (DORIC
// outputs fed to VDC inputs), as used in beam tests, is made outside this
// module. DORIC inputs are currents in A (real); VDC outputs are VCSEL anode
// currents and the chip's supply current in A. The decoder runs on clk_os,
// OSR x 40 MHz; the VDC is combinational.
module optolink_asics
  import optolink_pkg::*;
#(
  parameter int unsigned NCH = NUM_CHANNELS,
  parameter int unsigned OSR = DORIC_OSR,
  parameter int unsigned WIN = DORIC_WIN
) (
  // DORIC
  input  logic           clk_os,
  input  logic           doric_reset,
  input  real            pin_signal [NCH],
  input  real            pin_noise  [NCH],
  output logic [NCH-1:0] doric_clk_p,
  output logic [NCH-1:0] doric_clk_n,
  output logic [NCH-1:0] doric_data_p,
  output logic [NCH-1:0] doric_data_n,
  // VDC
  input  logic [NCH-1:0] vdc_in_p,
  input  logic [NCH-1:0] vdc_in_n,
  input  real            vdc_v_iset,
  input  real            vdc_v_tune,
  output real            vcsel_anode [NCH],
  output real            vdc_i_supply
);

  doric #(.NCH(NCH), .OSR(OSR), .WIN(WIN)) u_doric (
    .clk_os   (clk_os),
    .rst      (doric_reset),
    .i_signal (pin_signal),
    .i_noise  (pin_noise),
    .clk_p    (doric_clk_p),
    .clk_n    (doric_clk_n),
    .data_p   (doric_data_p),
    .data_n   (doric_data_n)
  );

  vdc #(.NCH(NCH)) u_vdc (
    .in_p           (vdc_in_p),
    .in_n           (vdc_in_n),
    .v_iset         (vdc_v_iset),
    .v_tune         (vdc_v_tune),
    .i_anode        (vcsel_anode),
    .i_supply_total (vdc_i_supply)
  );

endmodule
