// dh_entropy_unit -- dynamic hybrid entropy unit (behavioural model).
//
// Two small ring oscillators, both enabled by `en`:
//
//   RO1 (jitter ring): an En-gated inverting LUT drives node R1; a buffer
//     LUT returns R1 to the gate's input.  One inversion in the loop, so
//     RO1 oscillates while `en` is 1.  The buffered copy of R1 is also the
//     select of the multiplexer in RO2.
//   RO2 (switched ring): a 2:1 MUX drives node R2.  Input 0 is an En-gated
//     inverting LUT fed from R2 (an inverter loop: R2 oscillates); input 1
//     is R2 itself (a holding loop: R2 keeps its level).  While R1 is 0 the
//     ring oscillates, while R1 is 1 it holds, so R1's jittered phase
//     decides, randomly, where R2 is frozen.  If R2 is caught in the middle
//     of a transition the holding loop is left metastable and settles to a
//     random level.
//
// In the complete generator the two nodes R1 and R2 are sampled by the
// flip-flops of the sampling array; sampling R1 extracts jitter, sampling
// R2 extracts the frozen, possibly metastable level.
//
// Model.  Every gate is a logic expression followed by a dh_delay_cell
// (LUT delay plus jitter).  The holding loop is modelled as the latch it
// forms: when the select rises, the MUX keeps the level it was passing;
// if the level on MUX input 0 changed less than META_WINDOW_PS before,
// the kept level is drawn at random instead (the metastable case).  This
// model is not synthesizable; on an FPGA the same netlist is built from
// LUTs and one F7 MUX.
//
// Ports:  en   input   enable of both rings (0: R1 = 1, RO2 frozen)
//         r1   output  node R1 (jitter ring)
//         r2   output  node R2 (switched ring)
// Counters for observation: n_hold (hold captures), n_meta (captures that
// resolved at random).
//
// Follows the paper: the topology, the MUX input numbering (0 = inverter
// loop, 1 = holding loop) and the enable of both rings.  Own choices: the
// gate type of the En-gated inverting stages (NAND of En and the loop
// signal), all delays, the jitter and the metastability window.
module dh_entropy_unit #(
  parameter int unsigned SEED           = 0,   // selects this unit's mismatch offsets
  parameter int unsigned DELAY_PS       = dh_trng_pkg::LUT_DELAY_PS,
  parameter int unsigned JITTER_PS      = dh_trng_pkg::JITTER_PS,
  parameter int unsigned META_WINDOW_PS = dh_trng_pkg::META_WINDOW_PS
) (
  input  logic en,
  output logic r1,
  output logic r2
);
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::skew_ps;

  // ---------------- RO1: En-gated inverter + buffer ----------------
  logic r1_fb;      // buffered R1: loop input and RO2 MUX select
  logic ro1_nand;

  assign ro1_nand = ~(en & r1_fb);

  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(4*SEED + 0)), .JITTER_PS(JITTER_PS), .INIT(1'b1))
    u_ro1_gate (.a(ro1_nand), .y(r1));
  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(4*SEED + 1)), .JITTER_PS(JITTER_PS), .INIT(1'b1))
    u_ro1_buf  (.a(r1), .y(r1_fb));

  // ---------------- RO2: MUX (0: inverter loop, 1: holding loop) ----------------
  logic ro2_nand;     // En-gated inversion of R2
  logic ro2_inv;      // the same after its LUT delay: MUX input 0
  logic mux_o;        // MUX output level before the MUX delay
  logic held;         // the MUX is in the holding loop
  logic in0_q;        // last seen level of MUX input 0
  longint unsigned t_in0;  // time of the last change on MUX input 0
  int unsigned n_hold;
  int unsigned n_meta;

  assign ro2_nand = ~(en & r2);

  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(4*SEED + 2)), .JITTER_PS(JITTER_PS), .INIT(1'b1))
    u_ro2_gate (.a(ro2_nand), .y(ro2_inv));

  initial begin
    t_in0  = 0;
    n_hold = 0;
    n_meta = 0;
    held   = 1'b0;
    mux_o  = 1'b0;
    in0_q  = 1'b1;
  end

  always @(r1_fb or ro2_inv) begin
    if (ro2_inv != in0_q) begin
      in0_q = ro2_inv;
      t_in0 = $time;
    end
    if (r1_fb) begin
      if (!held) begin
        held   = 1'b1;
        n_hold = n_hold + 1;
        if ($time - t_in0 < longint'(META_WINDOW_PS)) begin
          mux_o  = 1'($urandom);
          n_meta = n_meta + 1;
        end
      end
    end else begin
      held  = 1'b0;
      mux_o = ro2_inv;
    end
  end

  dh_delay_cell #(.DELAY_PS(DELAY_PS + skew_ps(4*SEED + 3)), .JITTER_PS(JITTER_PS), .INIT(1'b0))
    u_ro2_mux (.a(mux_o), .y(r2));

endmodule
