// tb_dh_entropy_source -- self-checking test of the complete entropy source.
//
// Disabled: the eight edge rings must be still, with every R1 node at 1,
// and each of the four central rings must follow the parity of its side
// inputs and of the shared feedback input (oscillate when odd, come to
// rest when even), for both feedback levels.  Enabled: all twelve ring
// signals must move, and the two structures must not run in lock step
// (their matching rings must differ in edge count, as mismatched LUTs do).
module tb_dh_entropy_source;
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  localparam int unsigned N = N_RINGS;

  logic         en, fb;
  logic [N-1:0] ring;
  int           checks, failures;

  dh_entropy_source dut (.en(en), .fb(fb), .ring(ring));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int edges [N];
  for (genvar k = 0; k < int'(N); k++) begin : g_mon
    always @(ring[k]) edges[k]++;
  end

  function automatic int count(input int k);
    return edges[k];
  endfunction

  // Parity of the side inputs of central ring c (0 upper, 1 lower) of set s.
  function automatic logic mode(input int s, input int c);
    if (c == 0) return ring[6*s + RING_A_RO2] ^ ring[6*s + RING_B_RO1] ^ fb;
    else        return ring[6*s + RING_A_RO1] ^ ring[6*s + RING_B_RO2] ^ fb;
  endfunction

  task automatic static_case(input logic fbv);
    int  e [N];
    bit  quiet;
    fb = fbv;
    #1_000;
    for (int s = 0; s < int'(N_SETS); s++)
      check(ring[6*s + RING_A_RO1] && ring[6*s + RING_B_RO1], "R1 nodes at 1 while disabled");
    // Let rings with even parity come to rest (stray pulses die out).
    for (int tries = 0; tries < 2000; tries++) begin
      for (int k = 0; k < int'(N); k++) e[k] = edges[k];
      #3_000;
      quiet = 1'b1;
      for (int s = 0; s < int'(N_SETS); s++)
        for (int c = 0; c < 2; c++)
          if (!mode(s, c) && edges[6*s + 4 + c] != e[6*s + 4 + c]) quiet = 1'b0;
      if (quiet) break;
    end
    check(quiet, "even-parity central rings come to rest");
    for (int k = 0; k < int'(N); k++) e[k] = edges[k];
    #20_000;
    for (int s = 0; s < int'(N_SETS); s++) begin
      for (int r = 0; r < 4; r++)
        check(edges[6*s + r] == e[6*s + r], $sformatf("set %0d edge ring %0d still", s, r));
      for (int c = 0; c < 2; c++) begin
        if (mode(s, c)) begin
          check(edges[6*s + 4 + c] - e[6*s + 4 + c] > 20,
                $sformatf("set %0d central ring %0d oscillates (fb=%0b)", s, c, fb));
          n_osc++;
        end else begin
          check(edges[6*s + 4 + c] == e[6*s + 4 + c],
                $sformatf("set %0d central ring %0d rests (fb=%0b)", s, c, fb));
          n_rest++;
        end
      end
    end
  endtask

  int n_osc, n_rest;
  int e0 [N];

  initial begin
    checks = 0; failures = 0; n_osc = 0; n_rest = 0;
    for (int k = 0; k < int'(N); k++) edges[k] = 0;
    en = 1'b0;
    fb = 1'b0;
    #5_000;
    static_case(1'b0);
    static_case(1'b1);
    static_case(1'b0);
    check(n_osc >= 4 && n_rest >= 4, "both central-ring modes exercised");

    en = 1'b1;
    #2_000;
    for (int k = 0; k < int'(N); k++) e0[k] = edges[k];
    repeat (200) begin
      #1613;
      fb = 1'($urandom);
    end
    for (int k = 0; k < int'(N); k++) begin
      e0[k] = edges[k] - e0[k];
      check(e0[k] > 50, $sformatf("ring %0d moves (%0d edges)", k, e0[k]));
    end
    begin
      int differ;
      differ = 0;
      for (int k = 0; k < int'(RINGS_PER_SET); k++)
        if (e0[k] != e0[RINGS_PER_SET + k]) differ++;
      check(differ >= 3, "the two structures do not run in lock step");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
