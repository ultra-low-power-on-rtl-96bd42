// tb_raven_full: one training sample and one inference on the accelerator
// at its default size (832 x 832 array, 412 x 508 RBM, 4 ms refractory),
// with the smallest pulse timing of the paper's table (a=9.1 us, b=4.4 us,
// c=20 ns, d=27 us). The Poisson run uses ten times the paper's 20 Hz rate
// and 4.5 ms phases (longer than the refractory period) so that every group
// of input neurons spikes within the short simulated time.
//
// Spikes are forced through the neurons' spike input pins so that pre/post
// pairs land at known time differences, and the touched cells are read
// through the observation port and compared with the expected set/reset
// steps: data phase Rp set + Rn reset (dt in [b, 2b)), Rp set only
// (dt in [2b, a+2b)), model phase the mirror image, inference no change.
// Label spikes forced in inference must give the expected class. A run with
// Poisson inputs checks which neuron groups receive spikes in each phase.
// Every mechanism (forward read, backward read, potentiation, depression,
// inference without programming, phase switch, classification, Poisson
// gating) is counted and must occur at least once.
module tb_raven_full;
  import raven_pkg::*;
  localparam int NPRE = 832, NPOST = 832, N_IMAGE = 384, N_LABEL = 20, N_VBIAS = 8;
  localparam int N_HIDDEN = 500, N_HBIAS = 8, REFR = REFR_TICKS, NC = 2, LBL = 1;
  localparam int A = A_TICKS_MIN, B = B_TICKS_MIN, C = C_TICKS_MIN, D = D_TICKS_MIN;
  localparam int NVIS = N_IMAGE + N_LABEL + N_VBIAS;
  localparam int CW = $clog2(N_LABEL + 1);

  logic clk = 0, rst_n = 0;
  pulse_timing_t timing;
  logic [31:0] data_ticks = 0, model_ticks = 0, infer_ticks = 0, poisson_thr = 0;
  logic [CW-1:0] num_classes = CW'(NC), label_class = CW'(LBL);
  logic [7:0] image [N_IMAGE];
  logic start_train = 0, start_infer = 0;
  logic [NPRE-1:0] ext_pre_spike = '0, pre_spike_out, pre_dropped;
  logic [NPOST-1:0] ext_post_spike = '0, post_spike_out, post_dropped;
  phase_e phase;
  logic busy, train_done, infer_done, result_valid;
  logic [$clog2(N_LABEL)-1:0] result_class;
  logic [15:0] label_count [N_LABEL];
  logic [15:0] set_events, reset_events;
  logic [$clog2(NPRE)-1:0] dbg_row = '0;
  logic [$clog2(NPOST)-1:0] dbg_col = '0;
  logic [G_BITS-1:0] dbg_gp, dbg_gn;
  int checks = 0, failures = 0;

  raven_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------ mechanism counters
  int n_fwd = 0, n_bwd = 0, n_set_data = 0, n_reset_data = 0, n_set_model = 0, n_reset_model = 0;
  int n_prog_infer = 0, n_switch = 0, n_class = 0, n_thr_fire = 0;
  int n_img_data = 0, n_img_model = 0, n_img_infer = 0, n_lab_data = 0, n_lab_model = 0;
  int n_lab_wrong = 0, n_vbias_model = 0, n_hbias_model = 0;
  phase_e last_phase = PHASE_IDLE;
  logic [NPRE-1:0] forced_q = '0;   // a forced spike leaves the neuron one tick later
  always @(posedge clk) forced_q <= ext_pre_spike;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_array.lif_bl_valid)  n_fwd++;
    if (dut.u_array.blif_bl_valid) n_bwd++;
    if (phase == PHASE_DATA)  begin n_set_data  += set_events; n_reset_data  += reset_events; end
    if (phase == PHASE_MODEL) begin n_set_model += set_events; n_reset_model += reset_events; end
    if (phase == PHASE_INFER || phase == PHASE_IDLE) n_prog_infer += set_events + reset_events;
    if (last_phase == PHASE_DATA && phase == PHASE_MODEL) n_switch++;
    last_phase = phase;
    for (int i = 0; i < N_IMAGE; i++) if (pre_spike_out[i] && !forced_q[i]) begin
      if (phase == PHASE_DATA) n_img_data++;
      if (phase == PHASE_MODEL) n_img_model++;
      if (phase == PHASE_INFER) n_img_infer++;
    end
    for (int k = 0; k < N_LABEL; k++) if (pre_spike_out[N_IMAGE + k] && !forced_q[N_IMAGE + k]) begin
      if (phase == PHASE_DATA) begin n_lab_data++; if (k % NC != LBL) n_lab_wrong++; end
      if (phase == PHASE_MODEL) n_lab_model++;
    end
    for (int i = N_IMAGE + N_LABEL; i < NVIS; i++) if (pre_spike_out[i] && phase == PHASE_MODEL) n_vbias_model++;
    for (int j = N_HIDDEN; j < N_HIDDEN + N_HBIAS; j++) if (post_spike_out[j] && phase == PHASE_MODEL) n_hbias_model++;
  end

  // --------------------------------------------------------------- helpers
  task automatic read_cell(input int r, input int c, output int gp, output int gn);
    dbg_row = ($bits(dbg_row))'(r); dbg_col = ($bits(dbg_col))'(c);
    #1;
    gp = int'(dbg_gp); gn = int'(dbg_gn);
  endtask

  // Force row r, then column c dt ticks later, and wait for the patterns.
  task automatic pair(input int r, input int c, input int dt);
    @(negedge clk);
    ext_pre_spike[r] = 1;
    if (dt == 0) ext_post_spike[c] = 1;
    @(negedge clk);
    ext_pre_spike[r] = 0;
    ext_post_spike[c] = 0;
    if (dt > 0) begin
      repeat (dt - 1) @(negedge clk);
      ext_post_spike[c] = 1;
      @(negedge clk);
      ext_post_spike[c] = 0;
    end
  endtask

  task automatic expect_pair(input int r, input int c, input int dt, input int dgp, input int dgn,
                             input string what);
    int gp0, gn0, gp1, gn1, gpx0, gnx0, gpx1, gnx1;
    read_cell(r, c, gp0, gn0);
    read_cell(r, (c + 1) % N_HIDDEN, gpx0, gnx0);
    pair(r, c, dt);
    repeat (2 * A + 2 * B + D + 10) @(negedge clk);
    read_cell(r, c, gp1, gn1);
    read_cell(r, (c + 1) % N_HIDDEN, gpx1, gnx1);
    check(gp1 - gp0 == dgp && gn1 - gn0 == dgn,
          $sformatf("%s: cell %0d,%0d dGp=%0d dGn=%0d", what, r, c, gp1 - gp0, gn1 - gn0));
    check(gpx1 == gpx0 && gnx1 == gnx0, {what, ": neighbour cell unchanged"});
  endtask

  task automatic wait_phase(input phase_e ph);
    while (phase != ph) @(negedge clk);
  endtask

  initial begin
    timing = '{a: tick_t'(A), b: tick_t'(B), c: tick_t'(C), d: tick_t'(D)};
    foreach (image[i]) image[i] = 8'(i * 255 / N_IMAGE);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // ---- 1. training sample with forced pairs, no Poisson input
    data_ticks  = 32'(6 * (2 * A + 2 * B + D + 20));
    model_ticks = 32'(3 * (2 * A + 2 * B + D + 20));
    start_train = 1; @(negedge clk); start_train = 0;
    wait_phase(PHASE_DATA);
    expect_pair(3, 2, B + 1,         1, -1, "data dt in [b,2b)");
    expect_pair(5, 3, 2 * B + 3,     1,  0, "data dt in [2b,a+2b)");
    expect_pair(1, 8 % N_HIDDEN, A + 2 * B + 5, 0,  0, "data dt beyond window");
    expect_pair(2, 9 % N_HIDDEN, 2,             0,  0, "data dt below b");
    wait_phase(PHASE_MODEL);
    expect_pair(6, 4, B + 1,        -1,  1, "model dt in [b,2b)");
    expect_pair(7, 5, 2 * B + 3,     0,  1, "model dt in [2b,a+2b)");
    @(posedge train_done);
    @(negedge clk);
    check(phase == PHASE_IDLE, "idle after training");

    // ---- 2. inference with forced pairs and label spikes
    infer_ticks = 32'(3 * (2 * A + 2 * B + D + 20));
    start_infer = 1; @(negedge clk); start_infer = 0;
    wait_phase(PHASE_INFER);
    expect_pair(4, 1, B + 1, 0, 0, "inference does not program");
    @(negedge clk);
    ext_pre_spike[N_IMAGE + 1] = 1; ext_pre_spike[N_IMAGE + 1 + NC] = 1; ext_pre_spike[N_IMAGE + 0] = 1;
    @(negedge clk);
    ext_pre_spike = '0;
    @(posedge infer_done);
    repeat (2) @(negedge clk);
    check(result_valid && result_class == 1, $sformatf("classified as %0d", result_class));
    check(label_count[0] == 1 && label_count[1] == 1 && label_count[1 + NC] == 1 && label_count[2] == 0,
          "label counts");
    if (result_valid) n_class++;

    // ---- 4. Poisson-driven training sample and inference
    poisson_thr = 32'(3370);
    label_class = CW'(LBL);
    data_ticks  = 32'(450000);
    model_ticks = 32'(450000);
    infer_ticks = 32'(450000);
    start_train = 1; @(negedge clk); start_train = 0;
    @(posedge train_done);
    @(negedge clk);
    start_infer = 1; @(negedge clk); start_infer = 0;
    @(posedge infer_done);
    repeat (2) @(negedge clk);
    check(result_valid, "second inference result");

    $display("fwd=%0d bwd=%0d set/reset data=%0d/%0d model=%0d/%0d infer=%0d switch=%0d class=%0d thr_fire=%0d",
             n_fwd, n_bwd, n_set_data, n_reset_data, n_set_model, n_reset_model, n_prog_infer,
             n_switch, n_class, n_thr_fire);
    $display("image spikes data/model/infer=%0d/%0d/%0d label data/model=%0d/%0d wrong=%0d bias model v/h=%0d/%0d",
             n_img_data, n_img_model, n_img_infer, n_lab_data, n_lab_model, n_lab_wrong, n_vbias_model, n_hbias_model);
    check(n_fwd > 0, "mechanism: forward read");
    check(n_bwd > 0, "mechanism: backward read");
    check(n_set_data > 0 && n_reset_data > 0, "mechanism: data-phase potentiation");
    check(n_set_model > 0 && n_reset_model > 0, "mechanism: model-phase depression");
    check(n_prog_infer == 0, "no programming outside learning phases");
    check(n_switch >= 2, "mechanism: data to model phase switch");
    check(n_class > 0, "mechanism: classification");
    check(n_img_data > 0 && n_img_infer > 0, "mechanism: Poisson image input");
    check(n_img_model == 0, "no image input in model phase");
    check(n_lab_data > 0 && n_lab_wrong == 0 && n_lab_model == 0, "label input only for the label class, data phase");
    check(n_vbias_model > 0 && n_hbias_model > 0, "bias input in model phase");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
