// Self-checking testbench of the four-channel VDC chip (vdc) at its default
// parameters. Random 80 Mbit/s data on all four LVDS inputs at two V_Iset
// settings and two Tunepad settings: each anode current must be the dim
// current or dim + 20 x Iset (capped at 20 mA) according to its own channel's
// bit, and the chip's supply current must stay at 4 x the bright current
// whatever the data.
`timescale 1ps/1ps
module tb_vdc;
  import optolink_pkg::*;

  localparam int NCH = NUM_CHANNELS;

  logic [NCH-1:0] in_p = '0, in_n = '1;
  real            v_iset = 0.5, v_tune = 1.0;
  real            i_anode [NCH];
  real            i_supply_total;

  vdc dut (
    .in_p (in_p), .in_n (in_n), .v_iset (v_iset), .v_tune (v_tune),
    .i_anode (i_anode), .i_supply_total (i_supply_total)
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

  logic [NCH-1:0] d;
  real dim, brt;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin
      v_iset = (s[0]) ? 1.5 : 0.3;
      v_tune = (s[1]) ? 1.2 : 1.0;
      dim = v_tune * 1.0e-3;
      brt = dim + 20.0e-3 * v_iset;
      if (brt > 20.0e-3) brt = 20.0e-3;
      for (int i = 0; i < 100; i++) begin
        d = NCH'($urandom);
        in_p = d; in_n = ~d;
        #6250;
        for (int c = 0; c < NCH; c++)
          check(near(i_anode[c], d[c] ? brt : dim),
                $sformatf("channel %0d: %g A, expected %g", c, i_anode[c], d[c] ? brt : dim));
        check(near(i_supply_total, NCH * brt), $sformatf("supply %g A", i_supply_total));
        #6250;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
