// tb_dh_trng -- end-to-end test of the generator at its default size.
//
// Runs the whole design (2 coupling structures, 12 rings, 14 flip-flops)
// with no parameter changed, clocked first at 620 MHz (the Artix-7 rate)
// and then at 670 MHz (the Virtex-6 rate).  It checks:
//  * one output bit per clock, equal in every cycle to the XOR of all
//    twelve ring levels this bench itself saw two clock edges earlier
//    (cycles where a ring edge coincides with the clock edge are skipped);
//  * reset clears the output;
//  * restart test: six times, stop, reset, enable and read the first 32
//    bits; all six words must differ;
//  * bias of a long stream within a few standard deviations of 1/2, and
//    small autocorrelation at lags 1..16;
//  * every mechanism of the design occurs: RO1 jitter sampling (R1 edges),
//    RO2 holding captures, random (metastable) resolution of a capture,
//    central-ring mode switches, feedback toggles, and the enable stopping
//    the edge rings.
module tb_dh_trng;
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  localparam int unsigned NBITS = 8192;   // long-stream length per clock rate
  localparam int unsigned MAXLAG = 16;

  logic clk, rst_n, en, out;
  int   checks, failures;
  int unsigned period;

  dh_trng dut (.clk(clk), .rst_n(rst_n), .en(en), .out(out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Clock with a selectable period (two phases of the test).
  initial begin
    clk = 1'b0;
    period = CLK_PERIOD_A7_PS;
    forever begin
      #(period / 2);
      clk = ~clk;
      #(period - period / 2);
      clk = ~clk;
    end
  end

  int unsigned cycles;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 60_000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- independent reference of the output ----------------
  logic [N_RINGS-1:0] ring_q;
  longint unsigned    t_ring;
  always @(dut.ring) begin
    ring_q = dut.ring;
    t_ring = $time;
  end

  // XOR of the ring levels at the last two edges; a flag marks edges
  // where a ring moved in the same picosecond (sampling order undefined).
  logic p1, p2;
  bit   amb1, amb2;
  bit   compare;
  int   compared, skipped;
  always @(posedge clk) begin
    #0;
    if (compare && rst_n) begin
      if (!amb2) begin
        check(out == p2, "output equals XOR of the rings sampled two edges earlier");
        compared++;
      end else skipped++;
    end
    p2   = p1;   amb2 = amb1;
    p1   = ^ring_q;
    amb1 = (t_ring == $time);
    if (!rst_n) begin p1 = 1'b0; p2 = 1'b0; amb1 = 1'b0; amb2 = 1'b0; end
  end

  // ---------------- mechanism counters ----------------
  // Feedback: count toggles arriving at the entropy source's feedback input.
  int   fb_toggles;
  logic fb_q;
  always @(dut.u_source.fb) begin
    if (dut.u_source.fb != fb_q) fb_toggles++;
    fb_q = dut.u_source.fb;
  end

  function automatic int unsigned sum_hold();
    return dut.u_source.g_set[0].u_cell.u_unit_a.n_hold + dut.u_source.g_set[0].u_cell.u_unit_b.n_hold
         + dut.u_source.g_set[1].u_cell.u_unit_a.n_hold + dut.u_source.g_set[1].u_cell.u_unit_b.n_hold;
  endfunction
  function automatic int unsigned sum_meta();
    return dut.u_source.g_set[0].u_cell.u_unit_a.n_meta + dut.u_source.g_set[0].u_cell.u_unit_b.n_meta
         + dut.u_source.g_set[1].u_cell.u_unit_a.n_meta + dut.u_source.g_set[1].u_cell.u_unit_b.n_meta;
  endfunction
  function automatic int unsigned sum_mode();
    return dut.u_source.g_set[0].u_cell.n_mode_up + dut.u_source.g_set[0].u_cell.n_mode_lo
         + dut.u_source.g_set[1].u_cell.n_mode_up + dut.u_source.g_set[1].u_cell.n_mode_lo;
  endfunction

  int r1_edges;
  always @(dut.ring[RING_A_RO1]) if (en) r1_edges++;

  // ---------------- stream statistics ----------------
  bit  stream [NBITS];

  task automatic collect(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      #1;
      stream[i] = out;
    end
  endtask

  task automatic stats(input string name);
    int    ones;
    real   bias, r;
    ones = 0;
    for (int i = 0; i < int'(NBITS); i++) ones += int'(stream[i]);
    begin
      int n, d;
      n = NBITS;
      d = 2 * ones - n;
      if (d < 0) d = -d;
      bias = 100.0 * d / n;        // |N1 - N0| / (N1 + N0)
    end
    $display("%s: %0d bits, %0d ones, bias %0.3f %%", name, NBITS, ones, bias);
    // 5 sigma of a fair coin: 5 * sqrt(N)/2 = 226 for N = 8192.
    check(ones > int'(NBITS) / 2 - 226 && ones < int'(NBITS) / 2 + 226, $sformatf("%s: bias", name));
    for (int lag = 1; lag <= int'(MAXLAG); lag++) begin
      int agree;
      agree = 0;
      for (int i = 0; i + lag < int'(NBITS); i++) agree += int'(stream[i] == stream[i + lag]);
      r = 2.0 * agree / real'(NBITS - lag) - 1.0;
      check(r < 0.1 && r > -0.1, $sformatf("%s: autocorrelation %0.4f at lag %0d", name, r, lag));
      if (lag <= 3) $display("%s: autocorrelation lag %0d = %0.4f", name, lag, r);
    end
  endtask

  // ---------------- test sequence ----------------
  logic [31:0] word [6];

  initial begin
    checks = 0; failures = 0; cycles = 0; compare = 0; compared = 0; skipped = 0;
    fb_toggles = 0; fb_q = 1'b0; r1_edges = 0;
    p1 = 0; p2 = 0; amb1 = 0; amb2 = 0; t_ring = 0;
    rst_n = 1'b0;
    en    = 1'b0;
    repeat (8) @(posedge clk);
    #1;
    check(out == 1'b0, "output cleared by reset");
    check(dut.ring[RING_A_RO1] && dut.ring[RING_B_RO1] &&
          dut.ring[6 + RING_A_RO1] && dut.ring[6 + RING_B_RO1], "R1 nodes at 1 while disabled");

    // Restart test.
    for (int k = 0; k < 6; k++) begin
      rst_n = 1'b0;
      en    = 1'b0;
      repeat (20) @(posedge clk);
      @(negedge clk);
      rst_n   = 1'b1;
      en      = 1'b1;
      compare = 1'b1;
      repeat (2) @(posedge clk);           // two register stages
      for (int i = 0; i < 32; i++) begin
        @(posedge clk);
        #1;
        word[k][31 - i] = out;
      end
      compare = 1'b0;
      $display("restart %0d: first 32 bits 0x%08h", k, word[k]);
    end
    for (int a = 0; a < 6; a++)
      for (int b = a + 1; b < 6; b++)
        check(word[a] != word[b], $sformatf("restart words %0d and %0d differ", a, b));

    // Long stream at 620 MHz.
    compare = 1'b1;
    collect(NBITS);
    stats("620 MHz");

    // Long stream at 670 MHz.
    @(negedge clk);
    period = CLK_PERIOD_V6_PS;
    repeat (4) @(posedge clk);
    collect(NBITS);
    stats("670 MHz");
    compare = 1'b0;

    // Enable low stops the edge rings.
    begin
      int e;
      en = 1'b0;
      repeat (10) @(posedge clk);
      e = r1_edges;
      repeat (20) @(posedge clk);
      check(r1_edges == e, "edge rings stop when disabled");
    end

    $display("compared %0d cycles (%0d skipped), RO1 edges %0d, RO2 holds %0d, random resolutions %0d, central mode switches %0d, feedback toggles %0d",
             compared, skipped, r1_edges, sum_hold(), sum_meta(), sum_mode(), fb_toggles);
    check(compared > 16000, "one bit per clock compared");
    check(r1_edges > 1000, "mechanism: RO1 jitter ring runs");
    check(sum_hold() > 1000, "mechanism: RO2 holding captures");
    check(sum_meta() > 0, "mechanism: metastable capture resolved at random");
    check(sum_mode() > 1000, "mechanism: central-ring mode switches");
    check(fb_toggles > 1000, "mechanism: feedback bit toggles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
