// Self-checking testbench of the DORIC decoder logic (doric_logic) at its
// default parameters (OSR = 32, WIN = 4).
//
// A bi-phase-mark source built into the testbench sends, per 25 ns bit, a
// transition at the bit start and, for a 1, another at mid-bit, each with
// 0..400 ps of random jitter. The oversampling clock runs at 782 ps, 0.1 %
// away from 32 x 40 MHz, so the decoder must keep re-aligning. Phases:
// idle bits for lock, random bits, a pause (input frozen: the decoder must
// drop lock and hold its outputs low), a second lock and random bits again,
// then an all-ones burst. Checked on every rising recovered-clock edge: DATA
// equals the bit before the current one, the rise follows the BPM bit-start
// transition by 0.5..3 sampling periods with a spread under 1 ns, the
// period is 25 ns +- 2 ns and the duty cycle within (50 +- 4) %. Also
// checked: CLK and DATA complements, outputs low while unlocked.
`timescale 1ps/1ps
module tb_doric_logic;
  import optolink_pkg::*;

  localparam longint      BIT_PS  = 25000;
  localparam longint      HALF_OS = 391;      // clk_os period 782 ps

  logic clk_os = 1'b0, rst = 1'b1, bpm = 1'b0;
  logic clk_p, clk_n, data_p, data_n;

  doric_logic dut (
    .clk_os (clk_os), .rst (rst), .bpm_in (bpm),
    .clk_p (clk_p), .clk_n (clk_n), .data_p (data_p), .data_n (data_n)
  );

  always #HALF_OS clk_os = ~clk_os;

  int checks = 0, failures = 0;
  bit     bits[$];
  longint t_start[$];
  bit     checking = 1'b0;
  longint lat_min = 64'd1 << 40, lat_max = 0;
  longint last_rise = -1;
  int     rises = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  task automatic send_bit(input bit d);
    int j0 = $urandom_range(0, 400);
    int j1 = $urandom_range(0, 400);
    #(j0);
    bpm = ~bpm;
    t_start.push_back($time);
    bits.push_back(d);
    #(BIT_PS / 2 - j0 + j1);
    if (d) bpm = ~bpm;
    #(BIT_PS / 2 - j1);
  endtask

  // Index of the bit whose start transition is the latest at time t.
  function automatic int bit_at(input longint t);
    int j = -1;
    for (int i = t_start.size() - 1; i >= 0; i--)
      if (t_start[i] <= t) begin j = i; break; end
    return j;
  endfunction

  longint now, lat, high;
  int     j;
  always @(posedge clk_p) begin
    now = $time;
    j = bit_at(now);
    rises++;
    if (checking && j >= 1) begin
      lat = now - t_start[j];
      check(data_p == bits[j-1], $sformatf("DATA %0b, expected bit %0d = %0b", data_p, j-1, bits[j-1]));
      check(lat >= HALF_OS && lat <= 6 * HALF_OS, $sformatf("clock latency %0d ps", lat));
      if (lat < lat_min) lat_min = lat;
      if (lat > lat_max) lat_max = lat;
      if (last_rise >= 0)
        check(now - last_rise >= BIT_PS - 2000 && now - last_rise <= BIT_PS + 2000,
              $sformatf("clock period %0d ps", now - last_rise));
    end
    last_rise = now;
  end

  always @(negedge clk_p) begin
    if (checking && last_rise >= 0) begin
      high = $time - last_rise;
      check(high * 100 >= 46 * BIT_PS && high * 100 <= 54 * BIT_PS,
            $sformatf("clock high time %0d ps", high));
    end
  end

  always @(posedge clk_os) begin
    if (!rst) begin
      check(clk_n == ~clk_p && data_n == ~data_p, "complementary outputs");
    end
  end

  initial begin
    #(200 * BIT_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ones = 0, paused_rises = 0;
  bit d;
  initial begin
    repeat (4) @(posedge clk_os);
    rst = 1'b0;
    // lock on idle (20 MHz) pattern
    repeat (4) send_bit(1'b0);
    check(rises > 0, "clock running after idle bits");
    checking = 1'b1;
    for (int i = 0; i < 60; i++) begin
      d = 1'($urandom_range(0, 1));
      ones += d;
      send_bit(d);
    end
    // pause: no transitions; the decoder must drop lock
    checking = 1'b0;
    last_rise = -1;
    #(2 * BIT_PS);
    paused_rises = rises;
    #(2 * BIT_PS);
    check(clk_p == 1'b0 && data_p == 1'b0, "outputs low after loss of input");
    check(rises == paused_rises, "no clock while the input is frozen (lock dropped)");
    // relock and decode again
    repeat (3) send_bit(1'b0);
    checking = 1'b1;
    for (int i = 0; i < 60; i++) send_bit(1'($urandom_range(0, 1)));
    // a burst of ones (40 MHz square wave) while locked
    repeat (8) send_bit(1'b1);
    repeat (2) send_bit(1'b0);
    check(ones > 10, "enough ones sent");
    check(lat_max - lat_min < 1000, $sformatf("clock timing spread %0d ps", lat_max - lat_min));
    // reset clears the outputs
    rst = 1'b1;
    #1000;
    check(clk_p == 1'b0 && data_p == 1'b0, "outputs low in reset");
    $display("latency %0d..%0d ps, %0d clock rises", lat_min, lat_max, rises);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
