// dh_entropy_source -- entropy source of the generator (behavioural model).
//
// Two identical nested coupling structures (dh_coupling_cell) side by
// side.  Together they hold four dynamic hybrid entropy units (eight edge
// rings) and four 2-XOR central rings, twelve rings in all, whose nodes
// leave on `ring`.  Both structures share the enable and the fed-back
// output bit.  Each structure gets its own mismatch seed, so no two rings
// share a frequency, as no two placed rings on an FPGA do.
//
// Ports:  en    input   enable of all edge rings
//         fb    input   fed-back output bit, into one XOR of every central ring
//         ring  output  N_SETS*6 ring signals; bits [6s +: 6] belong to
//                       structure s, in the order of dh_trng_pkg::ring_e
//
// Follows the paper: two identical structures, 12 ring signals, common
// enable and feedback.  N_SETS is a parameter only so the structure count
// can be studied; the published design uses 2.
module dh_entropy_source #(
  parameter int unsigned N_SETS    = dh_trng_pkg::N_SETS,
  parameter int unsigned DELAY_PS  = dh_trng_pkg::LUT_DELAY_PS,
  parameter int unsigned JITTER_PS = dh_trng_pkg::JITTER_PS
) (
  input  logic                  en,
  input  logic                  fb,
  output logic [6*N_SETS-1:0]   ring
);
  timeunit 1ps;
  timeprecision 1ps;

  for (genvar s = 0; s < N_SETS; s++) begin : g_set
    dh_coupling_cell #(.SEED(s), .DELAY_PS(DELAY_PS), .JITTER_PS(JITTER_PS))
      u_cell (.en(en), .fb(fb), .ring(ring[6*s +: 6]));
  end

endmodule
