// tb_pre_neuron: presynaptic neuron circuit. Checks that a spike on the
// input pin fires the neuron and starts the row pattern (LIF_WL d+2 ticks
// after the input tick, set/reset windows after a+b+2; one tick for the
// neuron to fire, one for the pulse generator to start), that the refractory
// period blocks a second input spike and ends after 4 ms, and that 17
// full-scale backward read events (17 x 0.06 > 1) fire the neuron.
module tb_pre_neuron;
  import raven_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, cur_valid = 0, spike_in = 0, spike_out, dropped;
  logic signed [CUR_W-1:0] cur_diff = '0;
  phase_e phase = PHASE_DATA;
  pulse_timing_t timing = '{a: 20'd5, b: 20'd3, c: 20'd2, d: 20'd16};
  row_lines_t lines;
  int checks = 0, failures = 0;

  pre_neuron dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // Fire at the input tick (k = 0), then watch the lines for k = 1..40.
  task automatic watch_pattern(input phase_e ph);
    for (int k = 1; k <= 40; k++) begin
      @(negedge clk);
      spike_in = 0;
      check(spike_out == (k == 1), $sformatf("spike_out k=%0d", k));
      check(lines.lif_wl == (k >= 18 && k < 20), $sformatf("lif_wl k=%0d", k));
      check((lines.stdp_wl_rp == WL_VWLL) == (ph == PHASE_DATA && k >= 10 && k < 18), $sformatf("rp k=%0d", k));
      check((lines.stdp_wl_rn == WL_VWLH) == (ph == PHASE_DATA && k >= 10 && k < 13), $sformatf("rn k=%0d", k));
    end
  endtask

  initial begin
    int n_ev;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    spike_in = 1;
    watch_pattern(PHASE_DATA);
  end

  initial begin
    int t0, n_ev;
    wait (rst_n);
    repeat (45) @(negedge clk);
    // refractory: input ignored
    spike_in = 1;
    @(negedge clk);
    spike_in = 0;
    begin
      bit any_fire = 0, any_read = 0;
      repeat (30) begin
        any_fire |= spike_out;
        any_read |= lines.lif_wl;
        @(negedge clk);
      end
      check(!any_fire && !any_read, "refractory blocks input");
    end
    repeat (REFR_TICKS) @(negedge clk);
    // refractory over: backward read events fire the neuron
    phase = PHASE_INFER;
    n_ev = 0;
    while (!spike_out && n_ev < 40) begin
      cur_valid = 1; cur_diff = 255;
      @(negedge clk);
      n_ev++;
    end
    cur_valid = 0;
    check(spike_out && (n_ev == 17 || n_ev == 18), $sformatf("fires after 17 events, got %0d", n_ev));
    repeat (40) begin
      check(lines.stdp_wl_rp == WL_GND && lines.stdp_wl_rn == WL_GND, "no programming in inference");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
