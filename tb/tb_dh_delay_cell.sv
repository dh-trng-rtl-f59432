// tb_dh_delay_cell -- self-checking test of the LUT delay model.
//
// Drives isolated transitions into one delay cell and measures, for each,
// the time until the output follows: it must lie within
// [DELAY, DELAY + JITTER] and carry the new level.  The spread of the
// measured delays must show real jitter (more than one distinct value,
// mean near DELAY + JITTER/2).  A pulse shorter than the delay must come
// through with both edges when it is wider than the glitch limit (150 ps
// against 100 ps), and must vanish when it is narrower (50 ps).
module tb_dh_delay_cell;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned DLY = 300;
  localparam int unsigned JIT = 20;
  localparam int unsigned N   = 400;

  logic a, y;
  int   checks, failures;

  dh_delay_cell #(.DELAY_PS(DLY), .JITTER_PS(JIT), .REJECT_PS(100), .INIT(1'b0)) dut (.a(a), .y(y));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned t0, dt, dmin, dmax, dsum;

  initial begin
    checks = 0; failures = 0;
    a = 1'b0;
    #1000;
    check(y == 1'b0, "settled initial level");
    dmin = '1; dmax = 0; dsum = 0;
    for (int i = 0; i < int'(N); i++) begin
      t0 = $time;
      a  = ~a;
      @(y);
      dt = $time - t0;
      check(y == a, "output level follows input");
      check(dt >= DLY && dt <= DLY + JIT, $sformatf("delay %0d in range", dt));
      if (dt < dmin) dmin = dt;
      if (dt > dmax) dmax = dt;
      dsum += dt;
      #(500 + ($urandom % 200));
    end
    check(dmax - dmin >= JIT / 2, $sformatf("jitter spread %0d..%0d", dmin, dmax));
    check(dsum / N >= DLY + JIT/2 - 3 && dsum / N <= DLY + JIT/2 + 3,
          $sformatf("mean delay %0d", dsum / N));

    // A 150 ps pulse passes with both edges.
    a = 1'b1;
    #1000;
    t0 = $time;
    a  = 1'b0;
    #150;
    a  = 1'b1;
    @(y);
    check(y == 1'b0, "pulse leading edge");
    dt = $time - t0;
    check(dt >= DLY && dt <= DLY + JIT, "pulse leading edge delay");
    @(y);
    check(y == 1'b1, "pulse trailing edge");
    dt = $time - t0;
    check(dt >= DLY + 150 - JIT && dt <= DLY + 150 + JIT, "pulse trailing edge delay");
    #1000;
    check(y == a, "level after pulse");

    // A 50 ps glitch is swallowed: the output does not move at all.
    begin
      int moves;
      moves = 0;
      a = 1'b0;
      #50;
      a = 1'b1;
      fork
        begin : watch
          forever begin @(y); moves++; end
        end
        #1000;
      join_any
      disable watch;
      check(moves == 0, "narrow glitch swallowed");
      check(y == 1'b1, "level after glitch");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
