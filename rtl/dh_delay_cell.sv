// dh_delay_cell -- behavioural model of one FPGA LUT stage with timing noise.
//
// This is a simulation model, not synthesizable logic.  On the FPGA every
// gate of the rings is a LUT; what makes the rings a noise source is
// analog: each transition takes the LUT and routing delay plus a small
// random amount (thermal and supply noise).  The model reproduces exactly
// that.  Each change of `a` is copied to `y` after DELAY_PS plus a random
// jitter of 0..JITTER_PS picoseconds (triangular distribution, drawn anew
// for every transition).  Pulses at least REJECT_PS wide are kept even when
// they are shorter than the delay, and several transitions may be in
// flight at once, as in a real ring; a narrower pulse is swallowed, as a
// real gate swallows a glitch (without that, glitches would circulate in a
// ring for ever).  At time zero `y` is driven to INIT and then,
// after one delay, to the value `a` had, so the loop it sits in starts
// from a defined state.
//
// Ports:  a  input  level entering the LUT (already the gate's logic result)
//         y  output the same level, delayed
// Timing: DELAY_PS .. DELAY_PS + JITTER_PS after each change of `a`;
//         input pulses narrower than REJECT_PS do not appear on `y`.
//
// The delay and jitter figures are this model's own choices; the paper
// gives only the principle (jittered edges sampled by a clock, Fig. 2a).
// To map the design onto an FPGA, replace this cell with a buffer LUT that
// the tools may not optimise away.
module dh_delay_cell #(
  parameter int unsigned DELAY_PS  = dh_trng_pkg::LUT_DELAY_PS,
  parameter int unsigned JITTER_PS = dh_trng_pkg::JITTER_PS,
  parameter int unsigned REJECT_PS = dh_trng_pkg::PULSE_REJECT_PS,
  parameter bit          INIT      = 1'b0
) (
  input  logic a,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  // Transitions are numbered.  One overtaken by a later transition (which
  // can happen only when jitter reorders two close edges) is dropped, so
  // `y` always ends at the latest value of `a`.  A transition that undoes
  // the previous, still pending one within REJECT_PS cancels it and is not
  // scheduled itself: the narrow pulse disappears.
  int unsigned     issued;
  int unsigned     applied;
  int unsigned     last_n;     // latest scheduled transition still pending, 0 if none
  longint unsigned last_t;     // the time it was issued
  bit              cancelled [int unsigned];

  initial begin
    y       = INIT;
    issued  = 0;
    applied = 0;
    last_n  = 0;
    last_t  = 0;
    forever begin
      if (last_n > applied && !cancelled.exists(last_n) &&
          $time - last_t < longint'(REJECT_PS)) begin
        cancelled[last_n] = 1'b1;
        last_n = 0;
      end else begin
        issued = issued + 1;
        // The first transition only sets the start level: never cancelled.
        last_n = (issued == 1) ? 0 : issued;
        last_t = $time;
        fork
          begin
            automatic int unsigned n = issued;
            automatic logic        v = a;
            automatic logic [7:0]  j = 8'(($urandom_range(JITTER_PS) +
                                            $urandom_range(JITTER_PS)) / 2);
            #(DELAY_PS);
            // Jitter in binary steps, so every delay control is a constant.
            if (j[7]) #128;
            if (j[6]) #64;
            if (j[5]) #32;
            if (j[4]) #16;
            if (j[3]) #8;
            if (j[2]) #4;
            if (j[1]) #2;
            if (j[0]) #1;
            if (cancelled.exists(n)) begin
              cancelled.delete(n);
            end else if (n > applied) begin
              applied = n;
              y       = v;
            end
          end
        join_none
      end
      @(a);
    end
  end

  initial begin
    assert (JITTER_PS < 256) else $error("JITTER_PS must be below 256");
    assert (REJECT_PS < DELAY_PS) else $error("REJECT_PS must be below DELAY_PS");
  end

endmodule
