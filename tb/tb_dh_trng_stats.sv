// tb_dh_trng_stats -- long-stream statistical run of the generator.
//
// Runs the default design at 620 MHz for one million output bits (the
// length of one sequence in the published deviation and autocorrelation
// tests) and evaluates the raw stream, with no post-processing:
//  * deviation |N1 - N0| / (N1 + N0) over the whole stream, within
//    five standard deviations of a fair coin (0.5 %);
//  * autocorrelation at lags 1..100 (Pearson coefficient of the 0/1
//    sequence with its shifted copy): below 0.3, the criterion used for
//    the published test, and below 0.01 (five standard deviations);
//  * the four simple AIS-31 tests T1..T4 (monobit, poker, runs, long run,
//    with their standard bounds for 20,000-bit blocks) on each of the 50
//    disjoint blocks of the stream; every block must pass.
// These are the statistical properties the design claims; a timing model
// cannot prove true randomness, only that the structure spreads the
// modelled jitter into balanced, uncorrelated bits.
module tb_dh_trng_stats;
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  localparam int NBITS  = 1_000_000;
  localparam int MAXLAG = 100;
  localparam int BLK    = 20_000;

  logic clk, rst_n, en, out;
  int   checks, failures;

  dh_trng dut (.clk(clk), .rst_n(rst_n), .en(en), .out(out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial clk = 1'b0;
  always #(CLK_PERIOD_A7_PS / 2) clk = ~clk;   // 806 ps half period: 1612 ps

  int unsigned cycles;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == NBITS + 1000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit stream [NBITS];

  // AIS-31 T1..T4 on one 20,000-bit block starting at bit b0.
  function automatic int t1_to_t4(input int b0);
    int ones, f [16], run_len, longest, fails;
    int runs [2][6];
    real x;
    fails = 0;
    ones  = 0;
    for (int i = 0; i < BLK; i++) ones += int'(stream[b0 + i]);
    if (!(ones > 9654 && ones < 10346)) fails++;                  // T1 monobit
    for (int k = 0; k < 16; k++) f[k] = 0;
    for (int i = 0; i < BLK / 4; i++) begin
      int v;
      v = 0;
      for (int j = 0; j < 4; j++) v = 2 * v + int'(stream[b0 + 4*i + j]);
      f[v]++;
    end
    x = 0.0;
    for (int k = 0; k < 16; k++) x += real'(f[k]) * real'(f[k]);
    x = 16.0 / 5000.0 * x - 5000.0;
    if (!(x > 1.03 && x < 57.4)) fails++;                          // T2 poker
    for (int v = 0; v < 2; v++) for (int l = 0; l < 6; l++) runs[v][l] = 0;
    run_len = 1;
    longest = 1;
    for (int i = 1; i <= BLK; i++) begin
      if (i < BLK && stream[b0 + i] == stream[b0 + i - 1]) run_len++;
      else begin
        runs[int'(stream[b0 + i - 1])][(run_len > 6 ? 6 : run_len) - 1]++;
        if (run_len > longest) longest = run_len;
        run_len = 1;
      end
    end
    for (int v = 0; v < 2; v++) begin                              // T3 runs
      if (!(runs[v][0] >= 2267 && runs[v][0] <= 2733)) fails++;
      if (!(runs[v][1] >= 1079 && runs[v][1] <= 1421)) fails++;
      if (!(runs[v][2] >=  502 && runs[v][2] <=  748)) fails++;
      if (!(runs[v][3] >=  223 && runs[v][3] <=  402)) fails++;
      if (!(runs[v][4] >=   90 && runs[v][4] <=  223)) fails++;
      if (!(runs[v][5] >=   90 && runs[v][5] <=  223)) fails++;
    end
    if (longest >= 34) fails++;                                    // T4 long run
    return fails;
  endfunction

  initial begin
    int ones, d, blocks_ok;
    real bias, r;
    checks = 0; failures = 0; cycles = 0;
    rst_n = 1'b0;
    en    = 1'b0;
    repeat (8) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    en    = 1'b1;
    repeat (2) @(posedge clk);
    for (int i = 0; i < NBITS; i++) begin
      @(posedge clk);
      #1;
      stream[i] = out;
    end

    ones = 0;
    for (int i = 0; i < NBITS; i++) ones += int'(stream[i]);
    d = 2 * ones - NBITS;
    if (d < 0) d = -d;
    bias = 100.0 * d / NBITS;
    $display("deviation: %0d ones of %0d, bias %0.4f %%", ones, NBITS, bias);
    check(bias < 0.5, "deviation within five standard deviations");

    begin
      real rmax;
      rmax = 0.0;
      for (int lag = 1; lag <= MAXLAG; lag++) begin
        int agree;
        agree = 0;
        for (int i = 0; i + lag < NBITS; i++) agree += int'(stream[i] == stream[i + lag]);
        r = 2.0 * agree / real'(NBITS - lag) - 1.0;
        if (r > rmax) rmax = r;
        if (-r > rmax) rmax = -r;
        check(r < 0.3 && r > -0.3, $sformatf("autocorrelation %0.5f at lag %0d below 0.3", r, lag));
        check(r < 0.01 && r > -0.01, $sformatf("autocorrelation %0.5f at lag %0d below 0.01", r, lag));
      end
      $display("autocorrelation, lags 1..%0d: largest magnitude %0.5f", MAXLAG, rmax);
    end

    blocks_ok = 0;
    for (int b = 0; b < NBITS / BLK; b++) begin
      int nf;
      nf = t1_to_t4(b * BLK);
      check(nf == 0, $sformatf("AIS-31 T1..T4 on block %0d (%0d sub-test failures)", b, nf));
      if (nf == 0) blocks_ok++;
    end
    $display("AIS-31 T1..T4: %0d of %0d blocks pass", blocks_ok, NBITS / BLK);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
