// tb_phase_controller: runs a training sample and an inference and checks,
// tick by tick, the phase, the input gates of each phase, the phase lengths,
// the done and clear strobes, that a start is ignored while busy, and the
// slot strobe period.
module tb_phase_controller;
  import raven_pkg::*;
  localparam int SLOT = 4;
  logic clk = 0, rst_n = 0, start_train = 0, start_infer = 0;
  logic [31:0] data_ticks = 10, model_ticks = 7, infer_ticks = 13;
  phase_e phase;
  logic busy, slot, img_en, label_en, vbias_en, hbias_en, cnt_clear, cnt_en, train_done, infer_done;
  int checks = 0, failures = 0;

  phase_controller #(.SLOT(SLOT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic expect_phase(input phase_e ph, input int n, input bit first_clear);
    for (int k = 0; k < n; k++) begin
      check(phase == ph, $sformatf("phase %0d tick %0d", ph, k));
      check(img_en   == (ph == PHASE_DATA || ph == PHASE_INFER), "img_en");
      check(label_en == (ph == PHASE_DATA), "label_en");
      check(vbias_en && hbias_en, "bias_en");
      check(cnt_en   == (ph == PHASE_INFER), "cnt_en");
      check(cnt_clear == (first_clear && k == 0), "cnt_clear");
      check(!train_done && !infer_done, "no done inside");
      if (k == 2) start_infer = 1;      // must be ignored while busy
      if (k == 3) start_infer = 0;
      @(negedge clk);
    end
  endtask

  // slot period
  int last_slot = -1, tick = 0;
  always @(negedge clk) if (rst_n) begin
    tick++;
    if (slot) begin
      if (last_slot >= 0) check(tick - last_slot == SLOT, "slot period");
      last_slot = tick;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(phase == PHASE_IDLE && !busy && !img_en && !vbias_en, "idle");
    start_train = 1; @(negedge clk); start_train = 0;
    expect_phase(PHASE_DATA, 10, 0);
    expect_phase(PHASE_MODEL, 7, 0);
    check(phase == PHASE_IDLE && train_done, "train_done");
    @(negedge clk);
    check(!train_done, "train_done one tick");
    start_infer = 1; @(negedge clk); start_infer = 0;
    expect_phase(PHASE_INFER, 13, 1);
    check(phase == PHASE_IDLE && infer_done, "infer_done");
    @(negedge clk);
    // different lengths
    data_ticks = 1; model_ticks = 3;
    start_train = 1; @(negedge clk); start_train = 0;
    expect_phase(PHASE_DATA, 1, 0);
    expect_phase(PHASE_MODEL, 3, 0);
    check(phase == PHASE_IDLE && train_done, "train_done 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
