// Self-checking testbench of the VDC LVDS receiver model: all four input
// states of the pair, then an 80 Mbit/s random bit stream (12.5 ns per bit)
// whose every bit must appear at the output within the bit.
`timescale 1ps/1ps
module tb_vdc_lvds_receiver;

  logic in_p = 1'b0, in_n = 1'b1, out;

  vdc_lvds_receiver dut (.in_p (in_p), .in_n (in_n), .out (out));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  bit d;

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_p = 1'b1; in_n = 1'b0; #100; check(out == 1'b1, "(1,0) -> 1");
    in_p = 1'b0; in_n = 1'b1; #100; check(out == 1'b0, "(0,1) -> 0");
    in_p = 1'b1; in_n = 1'b1; #100; check(out == 1'b0, "(1,1) -> fail-safe 0");
    in_p = 1'b0; in_n = 1'b0; #100; check(out == 1'b0, "(0,0) -> fail-safe 0");
    for (int i = 0; i < 200; i++) begin
      d = 1'($urandom_range(0, 1));
      in_p = d; in_n = ~d;
      #6250;                      // middle of the 12.5 ns bit
      check(out == d, $sformatf("bit %0d", i));
      #6250;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
