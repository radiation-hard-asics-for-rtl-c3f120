// End-to-end testbench of the two opto-link ASICs (optolink_asics) at their
// default parameters (four channels, OSR = 32), wired as a loop-back: each
// DORIC channel's DATA pair drives the LVDS input of the same VDC channel, so
// the VCSEL current carries the decoded commands back, as in a beam-test
// loop where the returned light is compared with the sent pattern.
//
// Per channel the testbench sends bi-phase-mark PRBS-7 data (own seed, own
// light amplitude in the 40..1000 uA range, own common-mode noise of up to
// +-150 uA on both DORIC inputs, 0..400 ps jitter) in three segments
// separated by six dark bit periods (fibre interruption). During the second
// dark gap it pulses the DORIC Reset and raises V_Iset, so the third segment
// runs at a larger VCSEL amplitude. On every rising recovered-clock edge in a
// segment's data part it checks DATA against the bit sent one period before
// and the VCSEL anode current against the bright or dim value for that bit,
// and checks the VDC supply current for constancy.
//
// Mechanisms counted, each of which must occur: lock acquisition, loss of
// lock on a dark input, Reset, decoded ones and zeros, decisions made while
// the common noise exceeded the decision threshold, bright and dim VCSEL
// states, and the V_Iset change.
`timescale 1ps/1ps
module tb_optolink_asics;
  import optolink_pkg::*;

  localparam int     NCH     = NUM_CHANNELS;
  localparam int     SEG_LEN [3] = '{64, 64, 34};   // bits per segment, 4 idle first
  localparam int     NBITS   = 64 + 64 + 34;
  localparam int     DARK    = 6;
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
    .clk_os       (clk_os),
    .doric_reset  (doric_reset),
    .pin_signal   (pin_signal),
    .pin_noise    (pin_noise),
    .doric_clk_p  (doric_clk_p),
    .doric_clk_n  (doric_clk_n),
    .doric_data_p (doric_data_p),
    .doric_data_n (doric_data_n),
    .vdc_in_p     (doric_data_p),     // loop-back: decoded data -> VCSEL
    .vdc_in_n     (doric_data_n),
    .vdc_v_iset   (vdc_v_iset),
    .vdc_v_tune   (vdc_v_tune),
    .vcsel_anode  (vcsel_anode),
    .vdc_i_supply (vdc_i_supply)
  );

  always #HALF_OS clk_os = ~clk_os;

  int  checks = 0, failures = 0;
  real amp   [NCH];
  real noise [NCH];
  bit  light [NCH];
  bit     bits    [NCH][NBITS];
  longint t_start [NCH][NBITS];
  int     nsent   [NCH];
  bit     checking [NCH];
  int     in_dark2 = 0, done = 0;
  // mechanism counters
  int n_lock = 0, n_loss = 0, n_reset = 0, n_one = 0, n_zero = 0;
  int n_noisy = 0, n_bright = 0, n_dim = 0, n_iset = 0;
  real bright_a, dim_a;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  function automatic bit near(input real a, input real b);
    return (a - b < 1.0e-9) && (b - a < 1.0e-9);
  endfunction

  always #50 begin
    for (int c = 0; c < NCH; c++) begin
      pin_signal[c] = (light[c] ? amp[c] : 0.0) + noise[c];
      pin_noise[c]  = noise[c];
    end
  end
  always #2000 begin
    for (int c = 0; c < NCH; c++)
      noise[c] = (real'($urandom_range(0, 300)) - 150.0) * 1.0e-6;
  end

  // VCSEL currents expected from the pad settings (1 mA per V on both pads,
  // amplitude 20 x Iset)
  always_comb begin
    dim_a    = vdc_v_tune * 1.0e-3;
    bright_a = dim_a + 20.0e-3 * vdc_v_iset;
  end

  initial begin
    #(longint'(NBITS + 3 * DARK + 40) * BIT_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    bit [6:0] prbs;
    int j0, j1, j, k;
    longint last;
    bit d;

    initial begin
      amp[c]   = (c == 0) ? 40.0e-6 : (c == 1) ? 200.0e-6 : (c == 2) ? 600.0e-6 : 1000.0e-6;
      light[c] = 1'b0;
      noise[c] = 0.0;
      nsent[c] = 0;
      checking[c] = 1'b0;
      prbs = 7'(c * 23 + 9);
      last = -1;
      k = 0;
      @(negedge doric_reset);
      #(c * 3100);
      for (int s = 0; s < 3; s++) begin
        for (int i = 0; i < SEG_LEN[s]; i++) begin
          if (i < 4) d = 1'b0;
          else begin
            d = prbs[6] ^ prbs[5];
            prbs = {prbs[5:0], d};
          end
          if (i == 4) checking[c] = 1'b1;
          j0 = $urandom_range(0, 400);
          j1 = $urandom_range(0, 400);
          #(j0);
          light[c] = ~light[c];
          t_start[c][k] = $time;
          bits[c][k] = d;
          k++;
          nsent[c] = k;
          #(BIT_PS / 2 - j0 + j1);
          if (d) light[c] = ~light[c];
          #(BIT_PS / 2 - j1);
        end
        if (s < 2) begin
          // fibre dark: no light, no transitions
          checking[c] = 1'b0;
          light[c] = 1'b0;
          if (s == 1) in_dark2++;
          #(DARK * BIT_PS);
          // the decoder must have dropped lock: no clock for 3 bit periods
          check($time - last > 3 * BIT_PS && doric_clk_p[c] == 1'b0,
                $sformatf("channel %0d clock stopped on dark input", c));
          if ($time - last > 3 * BIT_PS) n_loss++;
        end
      end
      checking[c] = 1'b0;
      done++;
    end

    always @(posedge doric_clk_p[c]) begin
      if (last < 0 || $time - last > 2 * BIT_PS) n_lock++;
      if (checking[c]) begin
        j = -1;
        for (int i = nsent[c] - 1; i >= 0; i--)
          if (t_start[c][i] <= $time) begin j = i; break; end
        if (j >= 1) begin
          check(doric_data_p[c] == bits[c][j-1],
                $sformatf("channel %0d bit %0d: DATA %0b, expected %0b", c, j-1,
                          doric_data_p[c], bits[c][j-1]));
          check(near(vcsel_anode[c], bits[c][j-1] ? bright_a : dim_a),
                $sformatf("channel %0d VCSEL %g A for bit %0b", c, vcsel_anode[c], bits[c][j-1]));
          check(near(vdc_i_supply, NCH * bright_a), "VDC supply current constant");
          check($time - t_start[c][j] <= 6 * HALF_OS + 100, $sformatf("channel %0d clock latency", c));
          if (last >= 0)
            check($time - last >= BIT_PS - 2000 && $time - last <= BIT_PS + 2000,
                  $sformatf("channel %0d clock period", c));
          if (bits[c][j-1]) n_one++; else n_zero++;
          if (vcsel_anode[c] > (bright_a + dim_a) / 2.0) n_bright++; else n_dim++;
          if (noise[c] > 20.0e-6 || noise[c] < -20.0e-6) n_noisy++;
        end
      end
      last = $time;
    end
  end

  initial begin
    repeat (4) @(posedge clk_os);
    doric_reset = 1'b0;
    // second dark gap: Reset pulse and a new V_Iset
    wait (in_dark2 == NCH);
    #(2 * BIT_PS);
    doric_reset = 1'b1;
    #(BIT_PS);
    check(doric_clk_p == '0 && doric_data_p == '0, "DORIC outputs low in Reset");
    for (int c = 0; c < NCH; c++)
      check(near(vcsel_anode[c], dim_a), "VCSEL dim while DORIC in Reset");
    n_reset++;
    doric_reset = 1'b0;
    vdc_v_iset = 0.8;        // 17 mA bright
    n_iset++;
    wait (done == NCH);
    check(n_lock >= 3 * NCH,  $sformatf("lock acquisitions: %0d", n_lock));
    check(n_loss == 2 * NCH,  $sformatf("losses of lock: %0d", n_loss));
    check(n_reset > 0,        "Reset applied");
    check(n_one > 0,          "ones decoded");
    check(n_zero > 0,         "zeros decoded");
    check(n_noisy > 0,        "decisions under common noise above threshold");
    check(n_bright > 0,       "VCSEL bright");
    check(n_dim > 0,          "VCSEL dim");
    check(n_iset > 0,         "V_Iset changed");
    check(doric_clk_n == ~doric_clk_p && doric_data_n == ~doric_data_p, "complementary outputs");
    $display("locks %0d, losses %0d, resets %0d, ones %0d, zeros %0d, noisy %0d, bright %0d, dim %0d, Iset changes %0d",
             n_lock, n_loss, n_reset, n_one, n_zero, n_noisy, n_bright, n_dim, n_iset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
