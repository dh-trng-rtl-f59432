// dh_coupling_cell -- nested coupling structure (behavioural model).
//
// Two dynamic hybrid entropy units, A and B, are inserted "in reverse"
// into two central rings of two XOR gates each:
//
//   upper central ring:  cu0 = R2(A) ^ cu1 ^ fb     cu1 = R1(B) ^ cu0
//   lower central ring:  cl0 = R1(A) ^ cl1          cl1 = R2(B) ^ cl0 ^ fb
//
// (each "=" is an XOR LUT followed by its delay).  A ring of two XORs has
// no fixed inversion: it oscillates while the XOR of its side inputs is 1
// and holds while it is 0.  The side inputs are the edge rings (RO1/RO2
// of the units) and the fed-back output bit `fb`, so each central ring
// switches irregularly between oscillating and holding, and carries the
// superposed jitter of the edge rings on both of its sides.  This is the
// central-ring polynomial f(x) = x1 + x2 + x_r' : one edge-ring signal
// from each side plus the feedback.
//
// Ports:  en     input   enable of the four edge rings
//         fb     input   fed-back random output bit (from the sampling array)
//         ring   output  the six ring signals, indexed by dh_trng_pkg::ring_e:
//                        [0] R1 of A, [1] R2 of A, [2] R1 of B, [3] R2 of B,
//                        [4] upper central ring (cu1), [5] lower central ring (cl0)
// Counters: n_mode_up / n_mode_lo count changes of each central ring's
// mode (oscillating <-> holding).
//
// Follows the paper: two units, two 2-XOR central rings, four edge rings,
// the reversed insertion (unit A's RO2 and unit B's RO1 drive the upper
// ring, A's RO1 and B's RO2 the lower), and the feedback entering one XOR
// of each central ring (as drawn for the feedback strategy).  Own choices:
// which node of each ring is tapped as its output and which edge-ring
// node drives each XOR (R1/R2 of the units), plus all timing.
module dh_coupling_cell #(
  parameter int unsigned SEED      = 0,
  parameter int unsigned DELAY_PS  = dh_trng_pkg::LUT_DELAY_PS,
  parameter int unsigned JITTER_PS = dh_trng_pkg::JITTER_PS
) (
  input  logic       en,
  input  logic       fb,
  output logic [5:0] ring
);
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  logic r1a, r2a, r1b, r2b;

  dh_entropy_unit #(.SEED(2*SEED + 0), .DELAY_PS(DELAY_PS), .JITTER_PS(JITTER_PS))
    u_unit_a (.en(en), .r1(r1a), .r2(r2a));
  dh_entropy_unit #(.SEED(2*SEED + 1), .DELAY_PS(DELAY_PS), .JITTER_PS(JITTER_PS))
    u_unit_b (.en(en), .r1(r1b), .r2(r2b));

  // Central rings.  Gate-mismatch indices continue after the units' own.
  localparam int unsigned SK = 8 * SEED + 100;

  logic cu0, cu1, cl0, cl1;
  logic xu0, xu1, xl0, xl1;

  assign xu0 = r2a ^ cu1 ^ fb;
  assign xu1 = r1b ^ cu0;
  assign xl0 = r1a ^ cl1;
  assign xl1 = r2b ^ cl0 ^ fb;

  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(SK + 0)), .JITTER_PS(JITTER_PS), .INIT(1'b0))
    u_xu0 (.a(xu0), .y(cu0));
  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(SK + 1)), .JITTER_PS(JITTER_PS), .INIT(1'b0))
    u_xu1 (.a(xu1), .y(cu1));
  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(SK + 2)), .JITTER_PS(JITTER_PS), .INIT(1'b0))
    u_xl0 (.a(xl0), .y(cl0));
  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(SK + 3)), .JITTER_PS(JITTER_PS), .INIT(1'b0))
    u_xl1 (.a(xl1), .y(cl1));

  always_comb begin
    ring             = '0;
    ring[RING_A_RO1] = r1a;
    ring[RING_A_RO2] = r2a;
    ring[RING_B_RO1] = r1b;
    ring[RING_B_RO2] = r2b;
    ring[RING_C_UP]  = cu1;
    ring[RING_C_LO]  = cl0;
  end

  // Mode of each central ring: 1 = oscillating (odd parity of side inputs).
  logic        mode_up, mode_lo;
  int unsigned n_mode_up, n_mode_lo;

  assign mode_up = r2a ^ r1b ^ fb;
  assign mode_lo = r1a ^ r2b ^ fb;

  initial begin
    n_mode_up = 0;
    n_mode_lo = 0;
  end
  always @(mode_up) n_mode_up = n_mode_up + 1;
  always @(mode_lo) n_mode_lo = n_mode_lo + 1;

endmodule
