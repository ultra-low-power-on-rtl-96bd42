// tb_post_pulse_gen: checks STDP_BL [a, a+c) and BLIF_WL [b, b+c) after a
// fire, with STDP_BL suppressed in inference, the pattern length and the
// dropping of a fire during a pattern.
module tb_post_pulse_gen;
  import raven_pkg::*;
  logic clk = 0, rst_n = 0, fire = 0;
  phase_e phase = PHASE_DATA;
  pulse_timing_t timing;
  col_lines_t lines;
  logic busy, dropped;
  int checks = 0, failures = 0;

  post_pulse_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_pattern(input phase_e ph, input int a, input int b, input int c, input bit refire);
    int len;
    bit learn;
    timing = '{a: tick_t'(a), b: tick_t'(b), c: tick_t'(c), d: '0};
    phase  = ph;
    learn  = (ph == PHASE_DATA) || (ph == PHASE_MODEL);
    len = ((a > b) ? a : b) + c;
    @(negedge clk); fire = 1;
    @(negedge clk); fire = 0;
    for (int k = 0; k < len + 3; k++) begin
      check(lines.stdp_bl == (learn && k >= a && k < a + c), $sformatf("stdp_bl k=%0d", k));
      check(lines.blif_wl == (k >= b && k < b + c), $sformatf("blif_wl k=%0d", k));
      check(busy == (k < len), $sformatf("busy k=%0d", k));
      if (refire && k == 2) fire = 1;
      if (refire && k == 3) begin fire = 0; check(dropped, "dropped"); end
      @(negedge clk);
    end
  endtask

  initial begin
    timing = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_pattern(PHASE_DATA,  9, 4, 2, 0);
    run_pattern(PHASE_MODEL, 3, 7, 3, 1);
    run_pattern(PHASE_INFER, 9, 4, 2, 0);
    run_pattern(PHASE_IDLE,  5, 5, 1, 0);
    run_pattern(PHASE_DATA,  A_TICKS_MIN, B_TICKS_MIN, C_TICKS_MIN, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
