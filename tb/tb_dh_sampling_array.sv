// tb_dh_sampling_array -- self-checking test of the multistage sampling array.
//
// Drives the twelve ring inputs with random levels that change between
// clock edges and compares `out` after every edge with a reference
// pipeline written here: sample all inputs, XOR each group of six,
// register, XOR the group registers.  Also checks the two-cycle latency
// from a single input change to the output, one new bit per cycle, and
// the asynchronous reset.
module tb_dh_sampling_array;
  timeunit 1ps;
  timeprecision 1ps;

  import dh_trng_pkg::*;

  localparam int unsigned NG = N_SETS;
  localparam int unsigned GS = RINGS_PER_SET;
  localparam int unsigned N  = NG * GS;
  localparam int unsigned T  = CLK_PERIOD_A7_PS;

  logic         clk, rst_n;
  logic [N-1:0] ring;
  logic         out;
  int           checks, failures;

  dh_sampling_array dut (.clk(clk), .rst_n(rst_n), .ring(ring), .out(out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial clk = 1'b0;
  always #(T/2) clk = ~clk;

  int cycles;
  always @(posedge clk) cycles++;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference pipeline.
  logic [N-1:0]  ref_s;
  logic [NG-1:0] ref_g;
  logic          ref_valid1, ref_valid2;

  function automatic logic [NG-1:0] group_xor(input logic [N-1:0] v);
    logic [NG-1:0] r;
    for (int g = 0; g < int'(NG); g++) begin
      r[g] = 1'b0;
      for (int i = 0; i < int'(GS); i++) r[g] ^= v[g*GS + i];
    end
    return r;
  endfunction

  bit   compare;
  int   ones;

  always @(posedge clk) begin
    ref_g <= group_xor(ref_s);
    ref_s <= ring;
  end

  initial begin
    checks = 0; failures = 0; cycles = 0; compare = 0; ones = 0;
    ring  = '0;
    rst_n = 1'b0;
    ref_s = '0; ref_g = '0;
    #(3*T);
    check(out == 1'b0, "output cleared by reset");
    check(dut.sample_q == '0 && dut.group_q == '0, "all flip-flops cleared");
    @(negedge clk);
    rst_n = 1'b1;

    // Latency: one input bit toggles, the output follows after two edges.
    for (int b = 0; b < int'(N); b++) begin
      logic prev_out;
      repeat (3) @(negedge clk);
      prev_out = out;
      ring[b] = ~ring[b];
      @(posedge clk); #1;
      check(out == prev_out, $sformatf("bit %0d: no output change after one edge", b));
      @(posedge clk); #1;
      check(out == ~prev_out, $sformatf("bit %0d: output toggles after two edges", b));
    end

    // Random stream: one output bit per clock, equal to the reference.
    repeat (4000) begin
      @(negedge clk);
      ring = N'({$urandom, $urandom});
      @(posedge clk); #1;
      check(out == ^ref_g, "output matches reference pipeline");
      ones += int'(out);
    end
    check(ones > 1700 && ones < 2300, "reference stream balanced");

    // Asynchronous reset in mid-cycle.
    @(negedge clk);
    ring = '1;
    @(posedge clk);
    #(T/4);
    rst_n = 1'b0;
    #1;
    check(dut.sample_q == '0 && dut.group_q == '0 && out == 1'b0, "asynchronous clear");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
