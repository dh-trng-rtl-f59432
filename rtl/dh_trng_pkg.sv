// dh_trng_pkg -- shared constants of the dynamic hybrid TRNG.
//
// The generator is built from two identical nested coupling structures.
// Each structure holds two dynamic hybrid entropy units (four "edge" rings:
// RO1 and RO2 of each unit) and two 2-stage XOR "central" rings, so it
// exposes six independent ring signals.  Two structures give the twelve
// ring signals that the multistage sampling array samples with twelve
// flip-flops, reduces with two 6-input XOR gates, registers in two more
// flip-flops and combines with one final XOR into the output bit.
// These counts (2 structures, 12 rings, 14 flip-flops) are the published
// architecture's.  The timing numbers below are this model's own choices
// for a 28 nm class FPGA: one LUT plus its local routing is modelled as a
// few hundred picoseconds, with a few picoseconds of random jitter on
// every transition.  All times are in picoseconds.
package dh_trng_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  // Architecture (published values).
  localparam int unsigned N_SETS         = 2;   // nested coupling structures
  localparam int unsigned UNITS_PER_SET  = 2;   // entropy units per structure
  localparam int unsigned RINGS_PER_SET  = 6;   // 4 edge rings + 2 central rings
  localparam int unsigned N_RINGS        = N_SETS * RINGS_PER_SET;  // 12

  // Sampling clocks of the two reported boards (620 Mbps and 670 Mbps,
  // one bit per clock), rounded to whole picoseconds.
  localparam int unsigned CLK_PERIOD_A7_PS = 1613;  // Artix-7, 620 MHz
  localparam int unsigned CLK_PERIOD_V6_PS = 1493;  // Virtex-6, 670 MHz

  // Behavioural timing of one LUT stage (this model's choice).
  localparam int unsigned LUT_DELAY_PS   = 310;
  localparam int unsigned JITTER_PS      = 12;
  // Narrowest pulse a LUT passes; narrower glitches are swallowed.
  localparam int unsigned PULSE_REJECT_PS = 100;
  // Window around a holding-loop capture in which the captured level of
  // RO2 is taken as metastable and resolves to a random value.
  localparam int unsigned META_WINDOW_PS = 40;

  // Per-instance mismatch: a fixed, distinct offset for each gate so the
  // rings do not run in lock step, as placed LUTs never do.
  function automatic int unsigned skew_ps(int unsigned idx);
    return (idx * 37) % 61;
  endfunction

  // Index of each of the six ring signals of one coupling structure.
  typedef enum logic [2:0] {
    RING_A_RO1 = 3'd0,  // unit A, jitter ring RO1 (node R1)
    RING_A_RO2 = 3'd1,  // unit A, switched ring RO2 (node R2)
    RING_B_RO1 = 3'd2,  // unit B, RO1
    RING_B_RO2 = 3'd3,  // unit B, RO2
    RING_C_UP  = 3'd4,  // upper central XOR ring
    RING_C_LO  = 3'd5   // lower central XOR ring
  } ring_e;

endpackage
