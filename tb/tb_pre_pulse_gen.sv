// tb_pre_pulse_gen: checks the presynaptic pulse pattern tick by tick in the
// data, model and inference phases, against windows computed here from a, b,
// c, d; checks the pattern length and that a fire during a pattern is dropped.
module tb_pre_pulse_gen;
  import raven_pkg::*;
  logic clk = 0, rst_n = 0, fire = 0;
  phase_e phase = PHASE_DATA;
  pulse_timing_t timing;
  row_lines_t lines;
  logic busy, dropped;
  int checks = 0, failures = 0;

  pre_pulse_gen dut (.*);
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

  task automatic run_pattern(input phase_e ph, input int a, input int b, input int c, input int d,
                             input bit refire);
    int len, k;
    wl_level_e exp_rp, exp_rn;
    bit in_set, in_rst, exp_lif;
    timing = '{a: tick_t'(a), b: tick_t'(b), c: tick_t'(c), d: tick_t'(d)};
    phase  = ph;
    len = (2*a + 2*b > d + c) ? 2*a + 2*b : d + c;
    @(negedge clk); fire = 1;
    @(negedge clk); fire = 0;
    for (k = 0; k < len + 3; k++) begin
      // sample in the middle of the tick after edge k
      in_set  = (k >= a + b) && (k < 2*a + 2*b);
      in_rst  = (k >= a + b) && (k < a + 2*b);
      exp_lif = (k >= d) && (k < d + c);
      exp_rp = WL_GND; exp_rn = WL_GND;
      if (ph == PHASE_DATA)  begin if (in_set) exp_rp = WL_VWLL; if (in_rst) exp_rn = WL_VWLH; end
      if (ph == PHASE_MODEL) begin if (in_set) exp_rn = WL_VWLL; if (in_rst) exp_rp = WL_VWLH; end
      check(lines.lif_wl == exp_lif, $sformatf("lif_wl k=%0d", k));
      check(lines.stdp_wl_rp == exp_rp, $sformatf("rp k=%0d ph=%0d", k, ph));
      check(lines.stdp_wl_rn == exp_rn, $sformatf("rn k=%0d ph=%0d", k, ph));
      check(busy == (k < len), $sformatf("busy k=%0d", k));
      if (refire && k == 3) fire = 1;
      if (refire && k == 4) begin fire = 0; check(dropped == 1'b1, "dropped"); end
      @(negedge clk);
    end
  endtask

  initial begin
    timing = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_pattern(PHASE_DATA,  5, 3, 2, 16, 0);
    run_pattern(PHASE_MODEL, 5, 3, 2, 16, 1);
    run_pattern(PHASE_INFER, 5, 3, 2, 16, 0);
    // d longer than the STDP window: length set by d+c
    run_pattern(PHASE_DATA,  4, 2, 3, 20, 0);
    // paper minimum timing in ticks (a=9.1us, b=4.4us, c=20ns, d=27us)
    run_pattern(PHASE_DATA,  A_TICKS_MIN, B_TICKS_MIN, C_TICKS_MIN, D_TICKS_MIN, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
