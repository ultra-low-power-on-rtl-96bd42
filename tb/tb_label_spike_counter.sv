// tb_label_spike_counter: feeds random label spikes, keeps its own per-neuron
// counts, and checks the counters, the per-class sums (neuron k in class
// k mod num_classes), the winning class, enable, clear and the latched
// result, for 4, 10 and 12 classes.
module tb_label_spike_counter;
  localparam int NL = 20;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, latch = 0;
  logic [NL-1:0] spikes = '0;
  logic [4:0] num_classes = 5'd4;
  logic [15:0] neuron_cnt [NL];
  logic [20:0] class_cnt [NL];
  logic [4:0] winner, result;
  logic result_valid;
  int checks = 0, failures = 0;
  int ref_cnt [NL];

  label_spike_counter #(.NLABEL(NL), .CNT_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run(input int nc, input int favour);
    int sums [NL];
    int best;
    num_classes = 5'(nc);
    clear = 1; @(negedge clk); clear = 0;
    foreach (ref_cnt[k]) ref_cnt[k] = 0;
    en = 1;
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < NL; k++) begin
        spikes[k] = ($urandom % 100) < ((k % nc == favour) ? 30 : 10);
        if (spikes[k]) ref_cnt[k]++;
      end
      @(negedge clk);
    end
    en = 0;
    spikes = '1;                 // ignored: counting disabled
    @(negedge clk);
    spikes = '0;
    foreach (sums[c]) sums[c] = 0;
    for (int k = 0; k < NL; k++) begin
      sums[k % nc] += ref_cnt[k];
      check(neuron_cnt[k] == 16'(ref_cnt[k]), $sformatf("neuron count %0d", k));
    end
    best = 0;
    for (int c = 1; c < nc; c++) if (sums[c] > sums[best]) best = c;
    for (int c = 0; c < nc; c++) check(class_cnt[c] == 21'(sums[c]), $sformatf("class sum %0d", c));
    check(winner == 5'(best), "winner");
    latch = 1; @(negedge clk); latch = 0;
    check(result_valid && result == 5'(best), "latched result");
    $display("nc=%0d favour=%0d winner=%0d", nc, favour, winner);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 2);
    run(10, 7);
    run(12, 11);
    run(4, 0);
    clear = 1; @(negedge clk); clear = 0;
    check(!result_valid && neuron_cnt[3] == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
