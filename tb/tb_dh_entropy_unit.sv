// tb_dh_entropy_unit -- self-checking test of the dynamic hybrid entropy unit.
//
// Checks, against bounds worked out from the LUT delay and jitter alone:
//  * disabled (en = 0): R1 sits at 1, neither ring moves;
//  * enabled: R1 oscillates with a half period of two LUT stages
//    (inverting gate + buffer), within the mismatch and jitter bounds;
//  * dynamic switching: R2 oscillates while the MUX select (buffered R1)
//    is 0 and never moves once the select has been 1 for longer than one
//    MUX delay (the holding loop); both regions must occur;
//  * a second unit with a wide metastability window must resolve some
//    hold captures at random, and must freeze R2 at both levels;
//  * sampling R1 and R2 with a 100 MHz clock and XORing them (the unit's
//    own output in Fig. 3a of the paper) gives a bit stream of
//    reasonable balance.
// After disabling again both rings must stop.
module tb_dh_entropy_unit;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned DLY     = 310;
  localparam int unsigned JIT     = 12;
  localparam int unsigned MAXSKEW = 60;                 // skew_ps() < 61
  localparam int unsigned STAGE_MAX = DLY + MAXSKEW + JIT;

  logic en;
  logic r1, r2, r1w, r2w;
  int   checks, failures;

  dh_entropy_unit #(.SEED(1)) dut (.en(en), .r1(r1), .r2(r2));
  dh_entropy_unit #(.SEED(2), .META_WINDOW_PS(2000)) dut_w (.en(en), .r1(r1w), .r2(r2w));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- monitors ----
  bit              run;        // enabled and settled
  longint unsigned t_r1, t_sel_rise;
  int              r1_edges, osc_edges, hold_viol, hold_regions, held0, held1;
  logic            sel_q;

  always @(r1) begin
    if (run) begin
      check($time - t_r1 >= 2*DLY && $time - t_r1 <= 2*STAGE_MAX,
            $sformatf("RO1 half period %0d", $time - t_r1));
      r1_edges++;
    end
    t_r1 = $time;
  end

  always @(dut.r1_fb) begin
    if (dut.r1_fb) begin
      t_sel_rise = $time;
      if (run) hold_regions++;
    end else if (run && sel_q) begin
      // End of a holding region: note the level R2 was frozen at.
      if (r2) held1++; else held0++;
    end
    sel_q = dut.r1_fb;
  end

  always @(r2) begin
    if (run) begin
      if (!dut.r1_fb) osc_edges++;
      else if ($time - t_sel_rise > STAGE_MAX) begin
        hold_viol++;
        check(1'b0, "R2 moved in the holding region");
      end
    end
  end

  // ---- 100 MHz sampling of the unit, as in its stand-alone form ----
  logic clk;
  int   ones, samples;
  initial clk = 1'b0;
  always #5000 clk = ~clk;
  always @(posedge clk) if (run) begin
    ones    += int'(r1 ^ r2);
    samples++;
  end

  int t_r2w, w_held0, w_held1;
  always @(dut_w.r1_fb) if (run && !dut_w.r1_fb) begin
    if (r2w) w_held1++; else w_held0++;
  end

  int toggles_off;
  logic r1_s, r2_s;

  initial begin
    checks = 0; failures = 0; run = 0;
    t_r1 = 0; t_sel_rise = 0; sel_q = 0;
    r1_edges = 0; osc_edges = 0; hold_viol = 0; hold_regions = 0; held0 = 0; held1 = 0;
    ones = 0; samples = 0; w_held0 = 0; w_held1 = 0;
    en = 1'b0;
    #10_000;
    check(r1 == 1'b1, "R1 is 1 while disabled");
    r1_s = r1; r2_s = r2;
    toggles_off = 0;
    fork
      begin : watch_off
        forever begin @(r1 or r2); toggles_off++; end
      end
      #20_000;
    join_any
    disable watch_off;
    check(toggles_off == 0, "rings still while disabled");

    en = 1'b1;
    #3_000;
    run = 1;
    #1_000_000;
    run = 0;
    $display("RO1 edges %0d, RO2 edges in oscillation region %0d, holding regions %0d (held 0:%0d 1:%0d)",
             r1_edges, osc_edges, hold_regions, held0, held1);
    $display("unit 2: hold captures %0d, random resolutions %0d (held 0:%0d 1:%0d)",
             dut_w.n_hold, dut_w.n_meta, w_held0, w_held1);
    $display("100 MHz samples %0d, ones %0d", samples, ones);
    check(r1_edges > 1000, "RO1 oscillates");
    check(osc_edges > 500, "RO2 oscillates in the oscillation region");
    check(hold_regions > 500, "RO2 enters the holding region");
    check(hold_viol == 0, "holding loop holds");
    check(dut.n_hold >= 500, "hold captures counted");
    check(dut_w.n_meta > 0, "metastable captures resolve at random");
    check(w_held0 > 0 && w_held1 > 0, "frozen at both levels");
    check(samples >= 99 && ones > samples * 3 / 10 && ones < samples * 7 / 10,
          "sampled output balanced");

    en = 1'b0;
    #5_000;
    check(r1 == 1'b1, "R1 back at 1 after disable");
    toggles_off = 0;
    fork
      begin : watch_off2
        forever begin @(r1 or r2); toggles_off++; end
      end
      #20_000;
    join_any
    disable watch_off2;
    check(toggles_off == 0, "rings stop after disable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
