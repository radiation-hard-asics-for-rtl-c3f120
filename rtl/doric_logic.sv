// DORIC decoder logic: one channel's bi-phase-mark (BPM) decoder.
//
// The BPM stream carries the 40 MHz bunch-crossing clock and one command bit
// per clock period. Every clock leading edge is sent as a transition; a
// command bit of 1 adds a second transition at the clock's trailing edge
// (mid-bit). With no command bits the stream is a plain 20 MHz square wave.
// This block recovers the 40 MHz clock (CLK/CLKbar) and the command bits
// (DATA/DATAbar) from that stream; it has the Reset input of the chip.
//
// How it works. The input is synchronised into the oversampling clock domain
// (clk_os, OSR samples per bit period) and its transitions detected. A phase
// counter `ph` counts samples within the bit.
//   ACQUIRE: the gap between consecutive transitions is measured. Two
//     transitions one bit period apart (+-WIN samples) with none between
//     them can only be two clock-edge transitions, because a mid-bit
//     transition is always followed by a clock-edge transition half a period
//     later. The second one sets ph to 0 and the decoder enters LOCKED.
//   LOCKED: a transition within +-WIN samples of ph = 0 is the clock edge
//     and re-aligns ph to 0 (this tracks a sampling clock that is not an
//     exact multiple of 40 MHz); one within +-WIN of ph = OSR/2 is a
//     command bit 1. A transition anywhere else, or a bit with no clock-edge
//     transition, drops back to ACQUIRE.
// CLK rises only on a detected clock-edge transition, so its rising edge
// follows the BPM transition by the synchroniser latency, two to three
// clk_os cycles (a spread of one sample, 0.78 ns at OSR = 32), and it stays
// high for exactly OSR/2 samples (ph = 1 .. OSR/2), a 50 % duty cycle
// within one sample of input jitter. DATA of bit k is decided
// when the mid-bit window closes (ph = OSR/2+WIN+1) and held until the same
// point of bit k+1, so the rising CLK edge that starts bit k+1 samples bit k
// in the middle of its valid time. Both outputs are 0 while not locked.
// All outputs are registered.
//
// What follows the published description: the BPM code, the 40 MHz clock,
// the CLK/DATA output pairs and the Reset input. This design's own choices:
// decoding by oversampling with a separate clock (the published text does
// not say how the chip recovers the clock), OSR and WIN, the lock rule,
// Reset active high and asynchronous, and outputs held at 0 while unlocked.
module doric_logic
  import optolink_pkg::*;
#(
  parameter int unsigned OSR = DORIC_OSR,
  parameter int unsigned WIN = DORIC_WIN
) (
  input  logic clk_os,   // oversampling clock, OSR x 40 MHz
  input  logic rst,      // Reset, active high
  input  logic bpm_in,   // BPM stream from the gain stage
  output logic clk_p,    // recovered 40 MHz clock
  output logic clk_n,
  output logic data_p,   // decoded command bit
  output logic data_n
);

  localparam int unsigned PW = $clog2(OSR);
  localparam int unsigned GW = $clog2(2 * OSR + 2);
  localparam logic [GW-1:0] GAP_MAX = GW'(2 * OSR + 1);

  initial begin
    assert (OSR >= 8 && (OSR & (OSR - 1)) == 0)
      else $error("doric_logic: OSR must be a power of two >= 8");
    assert (WIN >= 1 && 4 * WIN < OSR)
      else $error("doric_logic: windows must not overlap (4*WIN < OSR)");
  end

  typedef enum logic {ACQUIRE, LOCKED} state_t;

  logic [2:0]    sync_q;      // [0],[1]: synchroniser, [2]: previous sample
  state_t        state_q, state_d;
  logic [PW-1:0] ph_q, ph_d;
  logic [GW-1:0] gap_q, gap_d;
  logic          lead_q, lead_d;  // clock-edge transition seen this bit
  logic          mid_q, mid_d;    // mid-bit transition seen this bit
  logic          data_q, data_d;
  logic          clk_q, clk_d;

  logic edge_det, in_lead, in_mid, gap_ok;
  logic lead_now;   // a clock-edge transition is detected this cycle

  assign edge_det = sync_q[2] ^ sync_q[1];
  assign in_lead  = (ph_q >= PW'(OSR - WIN)) || (ph_q <= PW'(WIN));
  assign in_mid   = (ph_q >= PW'(OSR / 2 - WIN)) && (ph_q <= PW'(OSR / 2 + WIN));
  assign gap_ok   = (gap_q >= GW'(OSR - WIN)) && (gap_q <= GW'(OSR + WIN));

  always_comb begin
    state_d = state_q;
    ph_d    = ph_q + PW'(1);           // wraps modulo OSR
    gap_d   = (gap_q == GAP_MAX) ? gap_q : gap_q + GW'(1);
    lead_d  = lead_q;
    mid_d   = mid_q;
    data_d  = data_q;
    lead_now = 1'b0;

    if (edge_det) gap_d = GW'(1);

    unique case (state_q)
      ACQUIRE: begin
        data_d = 1'b0;
        mid_d  = 1'b0;
        if (edge_det && gap_ok) begin
          state_d  = LOCKED;
          ph_d     = PW'(1);
          lead_d   = 1'b1;
          lead_now = 1'b1;
        end
      end
      LOCKED: begin
        if (edge_det && in_lead) begin
          ph_d     = PW'(1);
          lead_d   = 1'b1;
          lead_now = 1'b1;
        end else if (edge_det && in_mid) begin
          mid_d = 1'b1;
        end else if (edge_det) begin
          state_d = ACQUIRE;            // transition outside both windows
        end else if (ph_q == PW'(WIN + 1)) begin
          if (!lead_q) state_d = ACQUIRE;  // clock-edge transition missing
          lead_d = 1'b0;
        end else if (ph_q == PW'(OSR / 2 + WIN + 1)) begin
          data_d = mid_q;
          mid_d  = 1'b0;
        end
        if (state_d == ACQUIRE) begin
          data_d = 1'b0;
          lead_d = 1'b0;
          mid_d  = 1'b0;
        end
      end
      default: state_d = ACQUIRE;
    endcase

    clk_d = clk_q;
    if (lead_now)                       clk_d = 1'b1;
    else if (ph_d == PW'(OSR / 2 + 1))  clk_d = 1'b0;
    if (state_d != LOCKED)              clk_d = 1'b0;
  end

  always_ff @(posedge clk_os or posedge rst) begin
    if (rst) begin
      sync_q  <= '0;
      state_q <= ACQUIRE;
      ph_q    <= '0;
      gap_q   <= '0;
      lead_q  <= 1'b0;
      mid_q   <= 1'b0;
      data_q  <= 1'b0;
      clk_q   <= 1'b0;
    end else begin
      sync_q  <= {sync_q[1:0], bpm_in};
      state_q <= state_d;
      ph_q    <= ph_d;
      gap_q   <= gap_d;
      lead_q  <= lead_d;
      mid_q   <= mid_d;
      data_q  <= data_d;
      clk_q   <= clk_d;
    end
  end

  assign clk_p  = clk_q;
  assign clk_n  = ~clk_q;
  assign data_p = data_q;
  assign data_n = ~data_q;

  // The recovered clock is high only in the first half of the bit, and only
  // while locked.
  a_clk_high_phase : assert property (@(posedge clk_os) disable iff (rst)
      clk_q |-> (state_q == LOCKED && ph_q >= PW'(1) && ph_q <= PW'(OSR / 2)));

endmodule
