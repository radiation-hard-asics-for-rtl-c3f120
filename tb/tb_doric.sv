// Self-checking testbench of the four-channel DORIC chip (doric) at its
// default parameters.
//
// Each channel receives its own bi-phase-mark stream of pseudo-random bits
// (PRBS-7, a different seed per channel) at its own light amplitude (40,
// 200, 600 and 1000 uA, the expected range), with its own common-mode noise
// current of up to +-150 uA on both the signal and the noise inputs. Each
// transition has 0..400 ps of jitter. After four idle bits for lock, every
// rising edge of a channel's recovered clock must show on its DATA output
// the bit before the current one, 25 ns +- 2 ns after the previous edge.
`timescale 1ps/1ps
module tb_doric;
  import optolink_pkg::*;

  localparam int     NCH     = NUM_CHANNELS;
  localparam int     NBITS   = 100;
  localparam longint BIT_PS  = 25000;
  localparam longint HALF_OS = 391;

  logic           clk_os = 1'b0, rst = 1'b1;
  real            i_signal [NCH];
  real            i_noise  [NCH];
  logic [NCH-1:0] clk_p, clk_n, data_p, data_n;

  doric dut (
    .clk_os (clk_os), .rst (rst), .i_signal (i_signal), .i_noise (i_noise),
    .clk_p (clk_p), .clk_n (clk_n), .data_p (data_p), .data_n (data_n)
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
  int     done = 0;
  int     decoded [NCH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // input currents: light plus common noise, refreshed every 50 ps
  always #50 begin
    for (int c = 0; c < NCH; c++) begin
      i_signal[c] = (light[c] ? amp[c] : 0.0) + noise[c];
      i_noise[c]  = noise[c];
    end
  end
  always #2000 begin
    for (int c = 0; c < NCH; c++)
      noise[c] = (real'($urandom_range(0, 300)) - 150.0) * 1.0e-6;
  end

  initial begin
    #(longint'(NBITS + 40) * BIT_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    bit [6:0] prbs;
    int j0, j1, j;
    longint last;

    initial begin
      amp[c]   = (c == 0) ? 40.0e-6 : (c == 1) ? 200.0e-6 : (c == 2) ? 600.0e-6 : 1000.0e-6;
      light[c] = 1'b0;
      noise[c] = 0.0;
      nsent[c] = 0;
      checking[c] = 1'b0;
      decoded[c] = 0;
      prbs = 7'(c * 19 + 5);
      last = -1;
      @(negedge rst);
      #(c * 3000);
      for (int i = 0; i < NBITS; i++) begin
        bit d;
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
        t_start[c][i] = $time;
        bits[c][i] = d;
        nsent[c] = i + 1;
        #(BIT_PS / 2 - j0 + j1);
        if (d) light[c] = ~light[c];
        #(BIT_PS / 2 - j1);
      end
      checking[c] = 1'b0;
      done++;
    end

    always @(posedge clk_p[c]) begin
      if (checking[c]) begin
        j = -1;
        for (int i = nsent[c] - 1; i >= 0; i--)
          if (t_start[c][i] <= $time) begin j = i; break; end
        if (j >= 1) begin
          check(data_p[c] == bits[c][j-1],
                $sformatf("channel %0d bit %0d: DATA %0b, expected %0b", c, j-1, data_p[c], bits[c][j-1]));
          check($time - t_start[c][j] <= 6 * HALF_OS + 100,
                $sformatf("channel %0d clock latency %0d ps", c, $time - t_start[c][j]));
          if (last >= 0)
            check($time - last >= BIT_PS - 2000 && $time - last <= BIT_PS + 2000,
                  $sformatf("channel %0d clock period", c));
          decoded[c]++;
        end
      end
      last = $time;
    end
  end

  initial begin
    repeat (4) @(posedge clk_os);
    rst = 1'b0;
    wait (done == NCH);
    for (int c = 0; c < NCH; c++)
      check(decoded[c] >= NBITS - 8, $sformatf("channel %0d decoded %0d bits", c, decoded[c]));
    check(clk_n == ~clk_p && data_n == ~data_p, "complementary outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
