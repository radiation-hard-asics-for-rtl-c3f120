// Self-checking testbench of the DORIC front-end model (doric_gain_stage).
//
// Drives the signal and noise inputs with light-on/light-off PIN currents
// over the expected 40..1000 uA range, with and without a noise current that
// is common to both inputs (supply pick-up, up to +-300 uA, far above the
// 20 uA decision threshold). Expected: the output follows the light for every
// amplitude whatever the common noise, because the noise-cancellation input
// removes it. A third pass puts the same noise on the signal input only and
// checks that the output then follows (signal - noise) against the
// threshold, worked out here from the currents.
`timescale 1ps/1ps
module tb_doric_gain_stage;

  real  i_signal, i_noise;
  logic bpm;

  doric_gain_stage dut (.i_signal (i_signal), .i_noise (i_noise), .bpm (bpm));

  int checks = 0, failures = 0;
  int disturbed = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  real amp, noise;
  bit  light;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // pass 1: no noise, amplitudes 40 uA .. 1000 uA
    for (int k = 0; k <= 24; k++) begin
      amp = 40.0e-6 + k * 40.0e-6;
      for (int l = 0; l < 2; l++) begin
        light = l[0];
        i_signal = light ? amp : 0.0;
        i_noise  = 0.0;
        #10;
        check(bpm == light, $sformatf("no noise, amp %g, light %0b", amp, light));
      end
    end
    // pass 2: common noise on both inputs
    for (int k = 0; k < 400; k++) begin
      amp   = (40 + $urandom_range(0, 960)) * 1.0e-6;
      noise = (real'($urandom_range(0, 600)) - 300.0) * 1.0e-6;
      light = 1'($urandom_range(0, 1));
      i_signal = (light ? amp : 0.0) + noise;
      i_noise  = noise;
      #10;
      check(bpm == light, $sformatf("common noise %g, amp %g, light %0b", noise, amp, light));
    end
    // pass 3: noise on the signal input only
    for (int k = 0; k < 400; k++) begin
      amp   = (40 + $urandom_range(0, 960)) * 1.0e-6;
      noise = (real'($urandom_range(0, 600)) - 300.0) * 1.0e-6;
      light = 1'($urandom_range(0, 1));
      i_signal = (light ? amp : 0.0) + noise;
      i_noise  = 0.0;
      #10;
      check(bpm == ((light ? amp : 0.0) + noise > 20.0e-6), "uncancelled noise");
      if (bpm != light) disturbed++;
    end
    check(disturbed > 0, "uncancelled noise disturbs the decision");
    $display("uncancelled noise flipped %0d of 400 decisions", disturbed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
