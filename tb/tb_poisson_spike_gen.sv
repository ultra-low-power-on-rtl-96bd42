// tb_poisson_spike_gen: compares every spike with a reference xorshift32 and
// threshold test, checks that no spike leaves outside a slot or when
// disabled, and that the spike count of a long run is within 4 sigma of
// the Bernoulli mean for two intensities.
module tb_poisson_spike_gen;
  logic clk = 0, rst_n = 0, en = 1, slot = 0, spike;
  logic [7:0] intensity = 8'd255;
  logic [31:0] thr = 32'd1_000_000;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'hDEADBEEF;

  poisson_spike_gen #(.SEED(SEED)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [31:0] rx = SEED;
  bit exp_spike = 0;
  always @(posedge clk) if (rst_n) begin
    exp_spike = 0;
    if (slot) begin
      rx = rx ^ (rx << 13); rx = rx ^ (rx >> 17); rx = rx ^ (rx << 5);
      exp_spike = en && (longint'(rx) < longint'(intensity) * longint'(thr));
    end
  end

  int count;
  always @(negedge clk) if (rst_n) begin
    check(spike == exp_spike, "spike vs reference");
    if (spike) count++;
  end

  task automatic run(input int nslots, input logic [7:0] inten, input bit enable, output int got);
    intensity = inten; en = enable; count = 0;
    for (int s = 0; s < nslots; s++) begin
      slot = (s % 2 == 0);   // every other tick is a slot
      @(negedge clk);
    end
    slot = 0;
    @(negedge clk);
    got = count;
  endtask

  initial begin
    int got;
    real p, mean, sd;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // p = 255 * 1e6 / 2^32 = 0.0594 per slot
    run(40000, 8'd255, 1, got);
    p = 255.0 * 1.0e6 / 4294967296.0; mean = 20000 * p; sd = $sqrt(20000 * p * (1 - p));
    check(got > mean - 4*sd && got < mean + 4*sd, "rate at 255");
    $display("intensity 255: %0d spikes, expected %0f", got, mean);
    run(40000, 8'd64, 1, got);
    p = 64.0 * 1.0e6 / 4294967296.0; mean = 20000 * p; sd = $sqrt(20000 * p * (1 - p));
    check(got > mean - 4*sd && got < mean + 4*sd, "rate at 64");
    run(4000, 8'd255, 0, got);
    check(got == 0, "disabled");
    run(4000, 8'd0, 1, got);
    check(got == 0, "zero intensity");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
