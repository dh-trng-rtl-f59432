// tb_dh_coupling_cell -- self-checking test of the nested coupling structure.
//
// With the edge rings disabled their nodes are constant (R1 = 1, R2 frozen),
// so each central 2-XOR ring must behave as the parity of its side inputs
// says: oscillate at one edge per loop (two XOR stages) when
// R2(A)^R1(B)^fb (upper) or R1(A)^R2(B)^fb (lower) is 1, and come to rest
// when it is 0.  Flipping fb flips both rings' modes.  A held ring must
// satisfy its two XOR equations.  With the edge rings enabled and fb
// driven at random, all six outputs must move and both central rings must
// switch mode repeatedly.
module tb_dh_coupling_cell;
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  localparam int unsigned DLY       = 310;
  localparam int unsigned JIT       = 12;
  localparam int unsigned STAGE_MAX = DLY + 60 + JIT;   // skew_ps() < 61

  logic       en, fb;
  logic [5:0] ring;
  int         checks, failures;

  dh_coupling_cell #(.SEED(0)) dut (.en(en), .fb(fb), .ring(ring));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Edges seen on each output.
  int edges [6];

  for (genvar k = 0; k < 6; k++) begin : g_mon
    always @(ring[k]) edges[k]++;
  end

  // Wait until output k has been quiet for QUIET ps; give up after LIMIT ps.
  localparam int unsigned QUIET = 3_000;
  localparam int unsigned LIMIT = 20_000_000;
  task automatic wait_quiet(input int k, output bit ok);
    int e;
    longint unsigned t_start;
    t_start = $time;
    ok = 1'b0;
    while ($time - t_start < LIMIT) begin
      e = edges[k];
      #(QUIET);
      if (edges[k] == e) begin
        ok = 1'b1;
        break;
      end
    end
  endtask

  // Disabled edge rings: predict each central ring's mode and test it.
  // An oscillating ring must keep running at one edge per loop delay; a
  // ring whose side inputs have even parity must come to rest (a pulse
  // left circulating in it shrinks away under jitter) in a state that
  // satisfies both of its XOR equations.
  localparam int unsigned WIN = 20_000;
  task automatic static_case(input logic fbv);
    logic up_osc, lo_osc;
    int   e_up, e_lo;
    bit   ok;
    fb = fbv;
    #1_000;
    up_osc = ring[RING_A_RO2] ^ ring[RING_B_RO1] ^ fb;
    lo_osc = ring[RING_A_RO1] ^ ring[RING_B_RO2] ^ fb;
    check(ring[RING_A_RO1] && ring[RING_B_RO1], "R1 nodes at 1 while disabled");
    if (!up_osc) begin
      wait_quiet(RING_C_UP, ok);
      check(ok, "upper ring comes to rest");
      check(dut.cu0 == (ring[RING_A_RO2] ^ dut.cu1 ^ fb) && dut.cu1 == (ring[RING_B_RO1] ^ dut.cu0),
            "held upper ring satisfies its XOR equations");
      held_seen++;
    end
    if (!lo_osc) begin
      wait_quiet(RING_C_LO, ok);
      check(ok, "lower ring comes to rest");
      check(dut.cl0 == (ring[RING_A_RO1] ^ dut.cl1) && dut.cl1 == (ring[RING_B_RO2] ^ dut.cl0 ^ fb),
            "held lower ring satisfies its XOR equations");
      held_seen++;
    end
    e_up = edges[RING_C_UP];
    e_lo = edges[RING_C_LO];
    #(WIN);
    e_up = edges[RING_C_UP] - e_up;
    e_lo = edges[RING_C_LO] - e_lo;
    if (up_osc) begin
      check(e_up >= int'(WIN / (2*STAGE_MAX)) - 1 && e_up <= int'(3 * WIN / (2*DLY)) + 1,
            $sformatf("upper ring oscillates, %0d edges", e_up));
      osc_seen++;
    end else
      check(e_up == 0, $sformatf("upper ring holds, %0d edges", e_up));
    if (lo_osc) begin
      check(e_lo >= int'(WIN / (2*STAGE_MAX)) - 1 && e_lo <= int'(3 * WIN / (2*DLY)) + 1,
            $sformatf("lower ring oscillates, %0d edges", e_lo));
      osc_seen++;
    end else
      check(e_lo == 0, $sformatf("lower ring holds, %0d edges", e_lo));
  endtask

  int osc_seen, held_seen;
  int e0 [6];

  initial begin
    checks = 0; failures = 0; osc_seen = 0; held_seen = 0;
    for (int k = 0; k < 6; k++) edges[k] = 0;
    en = 1'b0;
    fb = 1'b0;
    #5_000;
    static_case(1'b0);
    static_case(1'b1);
    static_case(1'b0);
    check(osc_seen >= 2 && held_seen >= 2, "both central-ring modes exercised");

    // Enabled, fb random once per 1.6 ns (a stand-in for the output bit).
    en = 1'b1;
    #3_000;
    for (int k = 0; k < 6; k++) e0[k] = edges[k];
    begin
      int mu, ml;
      mu = dut.n_mode_up;
      ml = dut.n_mode_lo;
      repeat (300) begin
        #1613;
        fb = 1'($urandom);
      end
      mu = dut.n_mode_up - mu;
      ml = dut.n_mode_lo - ml;
      $display("mode switches: upper %0d lower %0d", mu, ml);
      check(mu > 50 && ml > 50, "central rings switch mode");
    end
    for (int k = 0; k < 6; k++) begin
      $display("ring %0d: %0d edges", k, edges[k] - e0[k]);
      check(edges[k] - e0[k] > 100, $sformatf("ring %0d moves", k));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
