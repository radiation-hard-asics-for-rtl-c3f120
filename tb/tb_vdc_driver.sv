// Self-checking testbench of the VCSEL driver model (vdc_driver).
//
// Sweeps the V_Iset pad from 0 to 2 V (Iset 0..2 mA) at the nominal Tunepad
// setting (1 V, 1 mA dim current) and at two other Tunepad settings, in both
// states, and compares with currents worked out here: dim = Tunepad current,
// bright = dim + 20 x Iset, bright capped at 20 mA, supply current the same
// in both states (VCSEL plus dummy branch). Then toggles the input at
// 80 Mbit/s and checks that the anode current and the constant supply
// current follow every bit.
`timescale 1ps/1ps
module tb_vdc_driver;

  logic bright = 1'b0;
  real  v_iset = 0.0, v_tune = 1.0;
  real  i_anode, i_dummy, i_supply;

  vdc_driver dut (
    .bright (bright), .v_iset (v_iset), .v_tune (v_tune),
    .i_anode (i_anode), .i_dummy (i_dummy), .i_supply (i_supply)
  );

  int checks = 0, failures = 0;

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

  real exp_dim, exp_bright, i_sup_dim, tunes[3];
  bit  d;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tunes[0] = 1.0; tunes[1] = 0.5; tunes[2] = 2.0;
    foreach (tunes[t]) begin
      v_tune = tunes[t];
      for (int k = 0; k <= 20; k++) begin
        v_iset  = 0.1 * k;
        exp_dim = v_tune * 1.0e-3;
        exp_bright = exp_dim + 20.0 * v_iset * 1.0e-3;
        if (exp_bright > 20.0e-3) exp_bright = 20.0e-3;
        bright = 1'b0; #100;
        check(near(i_anode, exp_dim), $sformatf("dim %g A, expected %g", i_anode, exp_dim));
        i_sup_dim = i_supply;
        bright = 1'b1; #100;
        check(near(i_anode, exp_bright),
              $sformatf("bright %g A, expected %g (Vset %g)", i_anode, exp_bright, v_iset));
        check(near(i_supply, i_sup_dim), "supply current independent of state");
        check(near(i_supply, exp_bright), "supply current equals bright current");
      end
    end
    // 80 Mbit/s switching at Iset = 0.5 mA: 11 mA bright, 1 mA dim
    v_tune = 1.0; v_iset = 0.5;
    for (int i = 0; i < 200; i++) begin
      d = 1'($urandom_range(0, 1));
      bright = d;
      #6250;
      check(near(i_anode, d ? 11.0e-3 : 1.0e-3), $sformatf("bit %0d current", i));
      check(near(i_supply, 11.0e-3), "constant supply while switching");
      #6250;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
