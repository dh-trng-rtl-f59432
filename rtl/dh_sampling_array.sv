// dh_sampling_array -- multistage sampling array and output XOR tree.
//
// Synthesizable.  Stage 1: one D flip-flop per ring signal samples the
// asynchronous ring nodes on every rising clock edge (this is where the
// jitter and the frozen RO2 levels become bits).  Stage 2: the samples are
// split into N_GROUPS groups of GROUP_SIZE; each group is XORed (one 6-input
// LUT on the FPGA) and registered.  Output: the XOR of the stage-2
// registers, a combinational function of flip-flops, gives one random bit
// per clock.  The same bit is the feedback returned to the central rings.
//
// With the published sizes (2 groups of 6) this is 12 + 2 = 14 flip-flops
// and 3 XOR LUTs.
//
// Ports:  clk    input   sampling clock (from the FPGA PLL)
//         rst_n  input   asynchronous active-low clear of all flip-flops
//         ring   input   N_GROUPS*GROUP_SIZE ring signals, asynchronous to clk
//         out    output  random bit
// Timing: a ring level captured at clock edge k reaches `out` just after
// edge k+1 (two register stages); a new bit every cycle.
//
// Follows the paper: flip-flop per ring, two 6-input XORs, two flip-flops,
// final XOR, output fed back.  Own choice: the reset, which the paper does
// not mention.  The first-stage flip-flops sample asynchronous signals on
// purpose; a metastable sample is part of the entropy, not a fault.
module dh_sampling_array #(
  parameter int unsigned N_GROUPS   = dh_trng_pkg::N_SETS,
  parameter int unsigned GROUP_SIZE = dh_trng_pkg::RINGS_PER_SET
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N_GROUPS*GROUP_SIZE-1:0] ring,
  output logic                           out
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [N_GROUPS*GROUP_SIZE-1:0] sample_q;
  logic [N_GROUPS-1:0]            group_q;
  logic [N_GROUPS-1:0]            group_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sample_q <= '0;
    else        sample_q <= ring;
  end

  always_comb begin
    for (int g = 0; g < int'(N_GROUPS); g++)
      group_d[g] = ^sample_q[g*GROUP_SIZE +: GROUP_SIZE];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) group_q <= '0;
    else        group_q <= group_d;
  end

  assign out = ^group_q;

endmodule
