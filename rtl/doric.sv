// The DORIC chip: NCH (four) channels, each decoding one bi-phase-mark
// optical input into a recovered 40 MHz clock and command data.
//
// Per channel: the analog front end (signal preamp, noise-cancellation
// preamp, differential gain stage; a behavioural model, doric_gain_stage)
// feeds the decoder logic (doric_logic). Channels are independent; the Reset
// pad and the decoder's oversampling clock are shared by the chip. Inputs are
// the signal-input and noise-input currents in A (real); outputs are the
// CLK/CLKbar and DATA/DATAbar pairs of every channel, registered in clk_os.
// Four channels per chip follows the published description; sharing Reset
// and the oversampling clock between channels is this design's choice.
module doric
  import optolink_pkg::*;
#(
  parameter int unsigned NCH = NUM_CHANNELS,
  parameter int unsigned OSR = DORIC_OSR,
  parameter int unsigned WIN = DORIC_WIN
) (
  input  logic           clk_os,
  input  logic           rst,
  input  real            i_signal [NCH],
  input  real            i_noise  [NCH],
  output logic [NCH-1:0] clk_p,
  output logic [NCH-1:0] clk_n,
  output logic [NCH-1:0] data_p,
  output logic [NCH-1:0] data_n
);

  logic [NCH-1:0] bpm;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    doric_gain_stage u_fe (
      .i_signal (i_signal[c]),
      .i_noise  (i_noise[c]),
      .bpm      (bpm[c])
    );
    doric_logic #(.OSR(OSR), .WIN(WIN)) u_logic (
      .clk_os (clk_os),
      .rst    (rst),
      .bpm_in (bpm[c]),
      .clk_p  (clk_p[c]),
      .clk_n  (clk_n[c]),
      .data_p (data_p[c]),
      .data_n (data_n[c])
    );
  end

endmodule
