// PIN-current threshold scan of the opto-link ASICs (optolink_asics, default
// parameters, DORIC data looped back into the VDC).
//
// This repeats the link measurement "smallest PIN current with no bit
// errors": for each light amplitude of a list between 10 and 60 uA, the
// DORIC is reset and all four channels receive the same bi-phase-mark
// PRBS-7 stream (4 idle bits, then 48 data bits) with common-mode noise of up
// to +-150 uA on both inputs. A bit counts as received when a recovered-clock
// edge shows it on DATA and the VCSEL current matches it. The threshold is
// the smallest amplitude at which every bit of every channel is received.
// Checked: amplitudes up to 20 uA (the front end's decision threshold) are
// not received, every amplitude from 22 uA up is received without error, so
// the threshold lies below both the 40 uA smallest expected signal and the
// 55 uA worst threshold observed on irradiated boards.
`timescale 1ps/1ps
module tb_pin_threshold_scan;
  import optolink_pkg::*;

  localparam int     NCH     = NUM_CHANNELS;
  localparam int     NBITS   = 52;
  localparam int     NAMP    = 9;
  localparam int     AMPS_UA [NAMP] = '{10, 15, 19, 20, 22, 25, 30, 40, 60};
  localparam longint BIT_PS  = 25000;
  localparam longint HALF_OS = 391;

  logic           clk_os = 1'b0, doric_reset = 1'b1;
  real            pin_signal [NCH];
  real            pin_noise  [NCH];
  logic [NCH-1:0] doric_clk_p, doric_clk_n, doric_data_p, doric_data_n;
  real            vdc_v_iset = 0.5, vdc_v_tune = 1.0;
  real            vcsel_anode [NCH];
  real            vdc_i_supply;

  optolink_asics dut (
    .clk_os (clk_os), .doric_reset (doric_reset),
    .pin_signal (pin_signal), .pin_noise (pin_noise),
    .doric_clk_p (doric_clk_p), .doric_clk_n (doric_clk_n),
    .doric_data_p (doric_data_p), .doric_data_n (doric_data_n),
    .vdc_in_p (doric_data_p), .vdc_in_n (doric_data_n),
    .vdc_v_iset (vdc_v_iset), .vdc_v_tune (vdc_v_tune),
    .vcsel_anode (vcsel_anode), .vdc_i_supply (vdc_i_supply)
  );

  always #HALF_OS clk_os = ~clk_os;

  int  checks = 0, failures = 0;
  real amp = 0.0;
  real noise [NCH];
  bit  light = 1'b0;
  bit     bits    [NBITS + 1];
  longint t_start [NBITS + 1];
  int     nsent = 0;
  int     good [NCH];
  int     threshold_ua = -1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  always #50 begin
    for (int c = 0; c < NCH; c++) begin
      pin_signal[c] = (light ? amp : 0.0) + noise[c];
      pin_noise[c]  = noise[c];
    end
  end
  always #2000 begin
    for (int c = 0; c < NCH; c++)
      noise[c] = (real'($urandom_range(0, 300)) - 150.0) * 1.0e-6;
  end

  initial begin
    #(longint'(NAMP * (NBITS + 8)) * BIT_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    int j;
    always @(posedge doric_clk_p[c]) begin
      j = -1;
      for (int i = nsent - 1; i >= 0; i--)
        if (t_start[i] <= $time) begin j = i; break; end
      // count a data bit (index >= 4) as received if DATA and the VCSEL agree
      if (j >= 5 && doric_data_p[c] == bits[j-1] &&
          ((vcsel_anode[c] > 6.0e-3) == bits[j-1]))
        good[c]++;
    end
  end

  bit [6:0] prbs;
  bit       d;
  int       j0, j1;
  bit       all_good;

  initial begin
    for (int c = 0; c < NCH; c++) noise[c] = 0.0;
    for (int a = 0; a < NAMP; a++) begin
      doric_reset = 1'b1;
      light = 1'b0;
      nsent = 0;
      for (int c = 0; c < NCH; c++) good[c] = 0;
      amp = AMPS_UA[a] * 1.0e-6;
      prbs = 7'h5A;
      #(2 * BIT_PS);
      doric_reset = 1'b0;
      #(BIT_PS);
      for (int i = 0; i < NBITS; i++) begin
        if (i < 4) d = 1'b0;
        else begin
          d = prbs[6] ^ prbs[5];
          prbs = {prbs[5:0], d};
        end
        j0 = $urandom_range(0, 400);
        j1 = $urandom_range(0, 400);
        #(j0);
        light = ~light;
        t_start[i] = $time;
        bits[i] = d;
        nsent = i + 1;
        #(BIT_PS / 2 - j0 + j1);
        if (d) light = ~light;
        #(BIT_PS / 2 - j1);
      end
      // the last bit is sampled by the next clock edge: send one more idle bit
      light = ~light;
      t_start[NBITS] = $time;
      bits[NBITS] = 1'b0;
      nsent = NBITS + 1;
      #(BIT_PS);
      all_good = 1'b1;
      for (int c = 0; c < NCH; c++) if (good[c] != NBITS - 4) all_good = 1'b0;
      $display("amplitude %0d uA: received %0d %0d %0d %0d of %0d bits", AMPS_UA[a],
               good[0], good[1], good[2], good[3], NBITS - 4);
      if (AMPS_UA[a] <= 20)
        check(!all_good, $sformatf("%0d uA must be below threshold", AMPS_UA[a]));
      else
        check(all_good, $sformatf("%0d uA must be received without error", AMPS_UA[a]));
      if (all_good && threshold_ua < 0) threshold_ua = AMPS_UA[a];
    end
    check(threshold_ua > 0 && threshold_ua <= 40, $sformatf("threshold %0d uA", threshold_ua));
    $display("PIN current threshold for no bit errors: %0d uA (scan points)", threshold_ua);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
