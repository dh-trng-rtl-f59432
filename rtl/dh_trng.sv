// dh_trng -- dynamic hybrid true random number generator, top level.
//
// The entropy source (twelve free-running rings, see dh_entropy_source)
// is sampled every clock by the multistage sampling array, which reduces
// the twelve samples through two registered 6-input XORs and one final
// XOR to one output bit per clock.  That output bit is also fed back into
// the central XOR rings of the entropy source, so every new bit disturbs
// the phase of the rings that produce the next ones.  No post-processing
// follows: `out` is the raw bit stream.
//
// Ports:  clk    input   sampling clock; the design targets 620 MHz
//                        (Artix-7) and 670 MHz (Virtex-6), one bit per cycle
//         rst_n  input   asynchronous active-low clear of the flip-flops
//         en     input   enable of the rings; hold low to stop them
//         out    output  random bit, new every clock
// Timing: bits produced by ring levels sampled at edge k appear after
// edge k+1.  After `en` rises the rings need a few nanoseconds before
// their phases have drifted apart; the first bits are already random
// (the paper's restart test reads the first 32 bits).
//
// The entropy source is a timing model (LUT delays with jitter), so this
// top is for simulation; for an FPGA the delay cells are replaced by LUTs
// kept by placement constraints.  The sampling array is plain RTL.
//
// Follows the paper: the two blocks, the twelve sampled rings, the
// feedback of the output bit into the central rings, `En` as the only
// control and one bit per clock.  Own choices: the reset input (the paper
// has none), and driving the feedback line from `out` itself, i.e. from
// the two second-stage flip-flops through the final XOR.  The paper
// speaks of an additional flip-flop for the feedback but counts only 14
// flip-flops in all, so no fifteenth one is added.
module dh_trng #(
  parameter int unsigned N_SETS    = dh_trng_pkg::N_SETS,
  parameter int unsigned DELAY_PS  = dh_trng_pkg::LUT_DELAY_PS,
  parameter int unsigned JITTER_PS = dh_trng_pkg::JITTER_PS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic out
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned RINGS_PER_SET = dh_trng_pkg::RINGS_PER_SET;

  logic [N_SETS*RINGS_PER_SET-1:0] ring;

  dh_entropy_source #(.N_SETS(N_SETS), .DELAY_PS(DELAY_PS), .JITTER_PS(JITTER_PS))
    u_source (.en(en), .fb(out), .ring(ring));

  dh_sampling_array #(.N_GROUPS(N_SETS), .GROUP_SIZE(RINGS_PER_SET))
    u_array (.clk(clk), .rst_n(rst_n), .ring(ring), .out(out));

endmodule
